// lb_ingress_arb: merges the Ethernet ports into the single pipeline.
//
// The load balancer runs "one armed": every port (Eth 0 and Eth 1 on a
// 2x100G card) both receives and returns traffic, and all ports feed one
// Parse stage. This arbiter grants the pipeline to one port for a whole frame
// (from its first beat to its last) and picks the next port round-robin, so
// frames never interleave. Each beat is tagged with the index of the port it
// came from, which the L2/L3 filters can match on and which the egress side
// uses to return the packet on the same port.
//
// The paper shows the two ports entering Parse; the round-robin, frame-atomic
// arbitration is this design's choice.
//
// Interface: per-port valid/ready streams in (the port field of in_beat is
// ignored), one valid/ready stream out. Timing: combinational from the
// granted input to the output; a new grant can be taken in the cycle after a
// last beat.
module lb_ingress_arb
  import ejfat_pkg::*;
#(
  parameter int unsigned NUM_PORTS = 2
) (
  input  logic  clk,
  input  logic  rst,
  input  logic  [NUM_PORTS-1:0] in_valid,
  input  beat_t in_beat [NUM_PORTS],
  output logic  [NUM_PORTS-1:0] in_ready,
  output logic  out_valid,
  output beat_t out_beat,
  input  logic  out_ready
);
  logic [PORT_W-1:0] grant, last_grant, pick;
  logic              busy;                 // inside a frame of port grant
  logic              found;

  // Port k places after port g, counting round the ring.
  function automatic logic [PORT_W-1:0] rr(input logic [PORT_W-1:0] g, input int unsigned k);
    return PORT_W'((int'(g) + k) % NUM_PORTS);
  endfunction

  // Round-robin choice, starting after the last granted port.
  always_comb begin
    pick  = last_grant;
    found = 1'b0;
    for (int unsigned k = 1; k <= NUM_PORTS; k++) begin
      if (!found && in_valid[rr(last_grant, k)]) begin
        pick  = rr(last_grant, k);
        found = 1'b1;
      end
    end
  end

  logic [PORT_W-1:0] sel;
  logic              sel_ok;
  assign sel    = busy ? grant : pick;
  assign sel_ok = busy || found;

  always_comb begin
    out_beat      = in_beat[sel];
    out_beat.port = sel;
    out_valid     = sel_ok && in_valid[sel];
    in_ready      = '0;
    if (sel_ok) in_ready[sel] = out_ready;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      busy       <= 1'b0;
      grant      <= '0;
      last_grant <= PORT_W'(NUM_PORTS - 1);
    end else if (out_valid && out_ready) begin
      grant      <= sel;
      last_grant <= sel;
      busy       <= !out_beat.last;
    end
  end
endmodule
