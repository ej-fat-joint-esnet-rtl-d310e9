// lb_epoch_assign: the Calendar Epoch Assignment table.
//
// Divides the 64-bit event number space of each LB instance into epochs. Each
// entry is a prefix of the event number (value and length 0..64) scoped to one
// instance, and the longest matching prefix wins, as in the paper, where P4
// has no range match and an epoch's range [start, boundary) is written as a
// set of prefixes, with a length-0 wildcard entry catching everything else
// (the newest epoch). Switching to a new epoch is then: add the prefixes of
// the old epoch's range, and repoint the wildcard; each write is a single
// entry, so every packet sees either the old or the new table.
//
// The paper gives key, value and the longest-prefix rule; the depth (ENTRIES)
// and resolving equal lengths to the lowest index are this design's choices.
//
// Interface: entries written by index. A lookup (lk_valid, lk_inst, lk_event)
// returns res_hit and res_epoch one cycle later.
module lb_epoch_assign
  import ejfat_pkg::*;
#(
  parameter int unsigned ENTRIES = 128
) (
  input  logic               clk,
  input  logic               rst,
  input  logic               wr_en,
  input  logic [$clog2(ENTRIES)-1:0] wr_idx,
  input  epoch_entry_t       wr_entry,
  input  logic               lk_valid,
  input  logic [INST_W-1:0]  lk_inst,
  input  logic [63:0]        lk_event,
  output logic               res_valid,
  output logic               res_hit,
  output logic [EPOCH_W-1:0] res_epoch
);
  epoch_entry_t tbl [ENTRIES];

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int i = 0; i < ENTRIES; i++) tbl[i] <= '0;
    end else if (wr_en) begin
      tbl[wr_idx] <= wr_entry;
    end
  end

  function automatic logic [63:0] pmask(input logic [6:0] plen);
    return (plen == 7'd0) ? 64'd0 : ~64'd0 << (7'd64 - plen);
  endfunction

  logic               hit;
  logic [6:0]         best_len;
  logic [EPOCH_W-1:0] epoch;
  always_comb begin
    logic [63:0] m;
    hit      = 1'b0;
    best_len = '0;
    epoch    = '0;
    for (int i = 0; i < ENTRIES; i++) begin
      m = pmask(tbl[i].plen);
      if (tbl[i].valid && tbl[i].inst == lk_inst && ((lk_event ^ tbl[i].prefix) & m) == 64'd0 &&
          (!hit || tbl[i].plen > best_len)) begin
        hit      = 1'b1;
        best_len = tbl[i].plen;
        epoch    = tbl[i].epoch;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      res_valid <= 1'b0;
      res_hit   <= 1'b0;
      res_epoch <= '0;
    end else begin
      res_valid <= lk_valid;
      res_hit   <= hit;
      res_epoch <= epoch;
    end
  end

  a_plen_range: assert property (@(posedge clk) disable iff (rst) wr_en |-> wr_entry.plen <= 7'd64);
endmodule
