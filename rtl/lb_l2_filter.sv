// lb_l2_filter: the Layer 2 input filter table.
//
// A small fully associative table keyed on (input port, Ethernet MAC DA). It
// rejects frames that are not addressed to one of the load balancer's
// unicast, multicast or broadcast MAC addresses, and for accepted frames
// returns the LB unicast MAC SA to be written into every packet generated
// from the frame. Each entry can wildcard the input port, as the paper's
// static-LAG example does for all its entries (broadcast, LB unicast MAC and
// the IPv6 solicited-node multicast MAC 33:33:ff:pp:qq:rr).
//
// The paper gives the key and value; the table depth (ENTRIES) and the rule
// that the lowest-numbered matching entry wins are this design's choices.
//
// Interface: the control plane writes entry wr_idx with wr_entry when wr_en.
// A lookup presented with lk_valid returns hit and mac_sa one cycle later
// (res_valid). A write and a lookup in the same cycle see the old entry.
module lb_l2_filter
  import ejfat_pkg::*;
#(
  parameter int unsigned ENTRIES = 16
) (
  input  logic              clk,
  input  logic              rst,
  input  logic              wr_en,
  input  logic [$clog2(ENTRIES)-1:0] wr_idx,
  input  l2_entry_t         wr_entry,
  input  logic              lk_valid,
  input  logic [PORT_W-1:0] lk_port,
  input  logic [47:0]       lk_mac_da,
  output logic              res_valid,
  output logic              res_hit,
  output logic [47:0]       res_mac_sa
);
  l2_entry_t tbl [ENTRIES];

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int i = 0; i < ENTRIES; i++) tbl[i] <= '0;
    end else if (wr_en) begin
      tbl[wr_idx] <= wr_entry;
    end
  end

  logic        hit;
  logic [47:0] sa;
  always_comb begin
    hit = 1'b0;
    sa  = '0;
    for (int i = ENTRIES - 1; i >= 0; i--) begin
      if (tbl[i].valid && tbl[i].mac_da == lk_mac_da &&
          (tbl[i].port_any || tbl[i].port == lk_port)) begin
        hit = 1'b1;
        sa  = tbl[i].mac_sa;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      res_valid  <= 1'b0;
      res_hit    <= 1'b0;
      res_mac_sa <= '0;
    end else begin
      res_valid  <= lk_valid;
      res_hit    <= hit;
      res_mac_sa <= sa;
    end
  end
endmodule
