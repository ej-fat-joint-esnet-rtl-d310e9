// lb_member_table: the Member Lookup table.
//
// Maps (LB instance, IP version of the packet, member ID) to the destination
// of one compute node: next-hop router MAC DA, CN IPv4 or IPv6 address, base
// UDP port and the number of entropy bits that widen the port range. IPv4
// packets use the IPv4 entries and IPv6 packets the IPv6 entries, as the
// paper specifies. An entry with valid = 0 makes the packet be discarded.
//
// The paper gives key and value; storing the exact-match table as a directly
// indexed RAM of N_INST * 2 * N_MEMBER words is this design's choice.
//
// Interface: wr_en writes wr_entry at {wr_inst, wr_v6, wr_member}; a read
// presented with lk_valid returns the entry one cycle later. Reset does not
// clear the RAM.
module lb_member_table
  import ejfat_pkg::*;
#(
  parameter int unsigned N_INST   = 4,
  parameter int unsigned N_MEMBER = 512
) (
  input  logic                clk,
  input  logic                rst,
  input  logic                wr_en,
  input  logic [INST_W-1:0]   wr_inst,
  input  logic                wr_v6,
  input  logic [MEMBER_W-1:0] wr_member,
  input  member_entry_t       wr_entry,
  input  logic                lk_valid,
  input  logic [INST_W-1:0]   lk_inst,
  input  logic                lk_v6,
  input  logic [MEMBER_W-1:0] lk_member,
  output logic                res_valid,
  output member_entry_t       res_entry
);
  localparam int unsigned DEPTH = N_INST * 2 * N_MEMBER;
  localparam int unsigned AW    = $clog2(DEPTH);

  member_entry_t ram [DEPTH];

  function automatic logic [AW-1:0] addr(input logic [INST_W-1:0] i, input logic v6,
                                         input logic [MEMBER_W-1:0] m);
    return AW'((int'(i) * 2 + int'(v6)) * N_MEMBER + int'(m) % N_MEMBER);
  endfunction

  always_ff @(posedge clk) begin
    if (wr_en) ram[addr(wr_inst, wr_v6, wr_member)] <= wr_entry;
    res_entry <= ram[addr(lk_inst, lk_v6, lk_member)];
  end

  always_ff @(posedge clk) begin
    if (rst) res_valid <= 1'b0;
    else     res_valid <= lk_valid;
  end
endmodule
