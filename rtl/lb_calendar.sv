// lb_calendar: the Calendar to Member Map.
//
// One 512-slot calendar per (LB instance, calendar epoch), held in a single
// block RAM addressed by {instance, epoch, slot}. The slot is the 9 lsbs of
// the event number, so consecutive events are spread over the slots, and a
// member written into more slots receives a proportionally larger share of
// the events (its weight). As the paper requires, a slot with no member makes
// the packet be discarded (res_valid_member = 0).
//
// The paper gives the key, the 512 slots and the weighting; a directly
// indexed RAM for this exact-match table, the number of epochs per instance
// (EPOCH_W) and the member-ID width are this design's choices.
//
// Interface: wr_en writes wr_entry at {wr_inst, wr_epoch, wr_slot}. A read
// presented with lk_valid returns the entry one cycle later (synchronous RAM).
// Reset does not clear the RAM; the control plane must write every slot of
// an epoch before that epoch is connected.
module lb_calendar
  import ejfat_pkg::*;
#(
  parameter int unsigned N_INST  = 4,
  parameter int unsigned N_EPOCH = 4,
  parameter int unsigned N_SLOT  = 512
) (
  input  logic               clk,
  input  logic               rst,
  input  logic               wr_en,
  input  logic [INST_W-1:0]  wr_inst,
  input  logic [EPOCH_W-1:0] wr_epoch,
  input  logic [SLOT_W-1:0]  wr_slot,
  input  cal_entry_t         wr_entry,
  input  logic               lk_valid,
  input  logic [INST_W-1:0]  lk_inst,
  input  logic [EPOCH_W-1:0] lk_epoch,
  input  logic [SLOT_W-1:0]  lk_slot,
  output logic               res_valid,
  output cal_entry_t         res_entry
);
  localparam int unsigned DEPTH = N_INST * N_EPOCH * N_SLOT;
  localparam int unsigned AW    = $clog2(DEPTH);

  cal_entry_t ram [DEPTH];

  function automatic logic [AW-1:0] addr(input logic [INST_W-1:0] i, input logic [EPOCH_W-1:0] e,
                                         input logic [SLOT_W-1:0] s);
    return AW'((int'(i) * N_EPOCH + int'(e)) * N_SLOT + int'(s) % N_SLOT);
  endfunction

  always_ff @(posedge clk) begin
    if (wr_en) ram[addr(wr_inst, wr_epoch, wr_slot)] <= wr_entry;
    res_entry <= ram[addr(lk_inst, lk_epoch, lk_slot)];
  end

  always_ff @(posedge clk) begin
    if (rst) res_valid <= 1'b0;
    else     res_valid <= lk_valid;
  end
endmodule
