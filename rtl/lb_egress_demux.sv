// lb_egress_demux: returns each packet on the port it arrived on.
//
// In the one-armed arrangement of the paper each FPGA edits packets and
// returns them on the same port to the aggregation switch. The deparser tags
// every outgoing beat with the packet's ingress port; this block steers the
// beat to that port's output stream and passes back that port's ready.
//
// Interface: one valid/ready stream in, NUM_PORTS valid/ready streams out.
// Timing: combinational, no storage.
module lb_egress_demux
  import ejfat_pkg::*;
#(
  parameter int unsigned NUM_PORTS = 2
) (
  input  logic  in_valid,
  input  beat_t in_beat,
  output logic  in_ready,
  output logic  [NUM_PORTS-1:0] out_valid,
  output beat_t out_beat [NUM_PORTS],
  input  logic  [NUM_PORTS-1:0] out_ready
);
  always_comb begin
    out_valid = '0;
    for (int p = 0; p < NUM_PORTS; p++) out_beat[p] = in_beat;
    in_ready = 1'b0;
    if (int'(in_beat.port) < NUM_PORTS) begin
      out_valid[in_beat.port] = in_valid;
      in_ready                = out_ready[in_beat.port];
    end
  end
endmodule
