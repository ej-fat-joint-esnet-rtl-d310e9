// lb_fifo: synchronous first-word-fall-through FIFO.
//
// Used twice in the load balancer: as the packet ("9k payload") buffer that
// holds the beats of each frame while its headers pass through the
// match-action tables, and as the queue of per-packet results in front of the
// deparser. The paper names the payload buffer but gives neither its depth nor
// its structure; a circular buffer of DEPTH words with a read and a write
// pointer is this design's choice.
//
// Interface: push when in_valid && in_ready; the head word is on out_data
// whenever out_valid, and is removed when out_ready is high in the same cycle.
// Timing: a word written in cycle t is visible at the output in cycle t+1.
// count gives the number of stored words. Reset empties the FIFO.
module lb_fifo #(
  parameter int unsigned WIDTH = 8,
  parameter int unsigned DEPTH = 512
) (
  input  logic             clk,
  input  logic             rst,
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [WIDTH-1:0] in_data,
  output logic             out_valid,
  input  logic             out_ready,
  output logic [WIDTH-1:0] out_data,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wr_ptr, rd_ptr;
  logic             push, pop;

  assign in_ready  = (count < DEPTH[$clog2(DEPTH+1)-1:0]);
  assign out_valid = (count != '0);
  assign push      = in_valid && in_ready;
  assign pop       = out_valid && out_ready;
  assign out_data  = mem[rd_ptr];

  function automatic logic [AW-1:0] next_ptr(input logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (push) mem[wr_ptr] <= in_data;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      wr_ptr <= '0;
      rd_ptr <= '0;
      count  <= '0;
    end else begin
      if (push) wr_ptr <= next_ptr(wr_ptr);
      if (pop)  rd_ptr <= next_ptr(rd_ptr);
      case ({push, pop})
        2'b10:   count <= count + 1'b1;
        2'b01:   count <= count - 1'b1;
        default: count <= count;
      endcase
    end
  end

  // A pop never happens on an empty FIFO and a push never on a full one.
  a_no_underflow: assert property (@(posedge clk) disable iff (rst) pop |-> count != '0);
  a_count_range:  assert property (@(posedge clk) disable iff (rst) 32'(count) <= DEPTH);

endmodule
