// lb_l3_filter: the Layer 3 input filter table.
//
// A fully associative table keyed on (input port, Ethertype, IPv4/IPv6 DST or
// ARP target protocol address). It rejects packets that are not addressed to
// one of the load balancer's unicast or multicast IP addresses. For accepted
// packets it returns the LB unicast IP address to use as the source of
// generated packets and the LB instance ID that selects the virtual load
// balancer context for the rest of the pipeline. IPv4 and ARP addresses are
// held in bits [31:0] of the 128-bit address field. Entries may wildcard the
// input port.
//
// The paper gives the key and value; the depth (ENTRIES) and the
// lowest-index-wins rule are this design's choices.
//
// Interface and timing as lb_l2_filter: writes by index, result one cycle
// after lk_valid.
module lb_l3_filter
  import ejfat_pkg::*;
#(
  parameter int unsigned ENTRIES = 16
) (
  input  logic              clk,
  input  logic              rst,
  input  logic              wr_en,
  input  logic [$clog2(ENTRIES)-1:0] wr_idx,
  input  l3_entry_t         wr_entry,
  input  logic              lk_valid,
  input  logic [PORT_W-1:0] lk_port,
  input  logic [15:0]       lk_ethertype,
  input  logic [127:0]      lk_addr,
  output logic              res_valid,
  output logic              res_hit,
  output logic [127:0]      res_src_ip,
  output logic [INST_W-1:0] res_inst
);
  l3_entry_t tbl [ENTRIES];

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int i = 0; i < ENTRIES; i++) tbl[i] <= '0;
    end else if (wr_en) begin
      tbl[wr_idx] <= wr_entry;
    end
  end

  logic              hit;
  logic [127:0]      src;
  logic [INST_W-1:0] inst;
  always_comb begin
    hit  = 1'b0;
    src  = '0;
    inst = '0;
    for (int i = ENTRIES - 1; i >= 0; i--) begin
      if (tbl[i].valid && tbl[i].ethertype == lk_ethertype && tbl[i].addr == lk_addr &&
          (tbl[i].port_any || tbl[i].port == lk_port)) begin
        hit  = 1'b1;
        src  = tbl[i].src_ip;
        inst = tbl[i].inst;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      res_valid  <= 1'b0;
      res_hit    <= 1'b0;
      res_src_ip <= '0;
      res_inst   <= '0;
    end else begin
      res_valid  <= lk_valid;
      res_hit    <= hit;
      res_src_ip <= src;
      res_inst   <= inst;
    end
  end
endmodule
