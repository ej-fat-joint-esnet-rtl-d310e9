// lb_deparser: the De Parse stage.
//
// For each packet it takes the packet's result (meta_t) from the metadata
// queue and the packet's beats from the payload buffer. A dropped packet is
// read out of the buffer and discarded. A forwarded packet leaves with its
// first hdr_len bytes replaced by the new Ethernet/IP/UDP header and with the
// 16-byte LB header removed, as the paper's rewrite table shows (the CN
// receives only the payload after the new UDP header).
//
// How: received and sent headers differ in length by exactly the 16 LB-header
// bytes for both IPv4 (58 -> 42) and IPv6 (78 -> 62), so every sent byte k at
// or past the new header is received byte k + 16. Sent beat n is therefore
// bytes 16..63 of received beat n followed by bytes 0..15 of beat n+1; the
// module keeps one received beat in a holding register to form it. The new
// header is at most 62 bytes, so it only ever overlays sent beat 0. If the
// last received beat has more than 16 bytes, one extra (flush) beat is sent.
// The splice itself is this design's choice; the paper names the stage only.
//
// Interface: valid/ready streams on all sides; meta_ready pops the metadata
// queue when a packet's last beat has been consumed. Timing: the first beat
// of a packet is absorbed without output, so a packet of N beats takes N+1
// cycles (N+2 with a flush beat) at full output readiness.
module lb_deparser
  import ejfat_pkg::*;
(
  input  logic  clk,
  input  logic  rst,
  input  logic  meta_valid,
  input  meta_t meta,
  output logic  meta_ready,
  input  logic  in_valid,
  input  beat_t in_beat,
  output logic  in_ready,
  output logic  out_valid,
  output beat_t out_beat,
  input  logic  out_ready
);
  localparam int unsigned SH = 16;   // LB header bytes removed

  typedef enum logic [1:0] {S_IDLE, S_FWD, S_FLUSH, S_DROP} state_e;
  state_e state;

  logic [DATA_W-1:0]     hold_data;
  logic [DATA_BYTES-1:0] hold_keep;
  logic                  first_q;

  logic [DATA_W-1:0]     cat_data;
  logic [DATA_BYTES-1:0] cat_keep;
  logic [DATA_W-1:0]     hdr_mask;

  always_comb begin
    for (int j = 0; j < DATA_BYTES; j++)
      hdr_mask[8*j +: 8] = (j < int'(meta.hdr_len)) ? 8'hff : 8'h00;
  end

  always_comb begin
    logic [DATA_W-1:0] d;
    if (state == S_FWD) begin
      d        = {in_beat.data[8*SH-1:0], hold_data[DATA_W-8*SH-1:0]};
      cat_keep = {in_beat.keep[SH-1:0], hold_keep[DATA_BYTES-SH-1:0]};
    end else begin
      d        = hold_data;
      cat_keep = hold_keep;
    end
    cat_data = first_q ? ((d & ~hdr_mask) | (meta.hdr & hdr_mask)) : d;
  end

  always_comb begin
    in_ready   = 1'b0;
    out_valid  = 1'b0;
    meta_ready = 1'b0;
    out_beat   = '0;
    out_beat.port = meta.port;
    out_beat.data = cat_data;
    out_beat.keep = cat_keep;
    unique case (state)
      S_IDLE: begin
        in_ready   = meta_valid;
        meta_ready = meta_valid && in_valid && meta.drop && in_beat.last;
      end
      S_FWD: begin
        out_valid     = in_valid;
        in_ready      = out_ready;
        out_beat.last = in_beat.last && !in_beat.keep[SH];
        meta_ready    = in_valid && out_ready && out_beat.last;
      end
      S_FLUSH: begin
        out_valid     = 1'b1;
        out_beat.last = 1'b1;
        meta_ready    = out_ready;
      end
      S_DROP: begin
        in_ready   = 1'b1;
        meta_ready = in_valid && in_beat.last;
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      state     <= S_IDLE;
      hold_data <= '0;
      hold_keep <= '0;
      first_q   <= 1'b0;
    end else begin
      unique case (state)
        S_IDLE: if (meta_valid && in_valid) begin
          if (meta.drop) begin
            if (!in_beat.last) state <= S_DROP;
          end else begin
            hold_data <= in_beat.data >> (8 * SH);
            hold_keep <= in_beat.keep >> SH;
            first_q   <= 1'b1;
            state     <= in_beat.last ? S_FLUSH : S_FWD;
          end
        end
        S_FWD: if (in_valid && out_ready) begin
          hold_data <= in_beat.data >> (8 * SH);
          hold_keep <= in_beat.keep >> SH;
          first_q   <= 1'b0;
          if (in_beat.last) state <= in_beat.keep[SH] ? S_FLUSH : S_IDLE;
        end
        S_FLUSH: if (out_ready) begin
          first_q <= 1'b0;
          state   <= S_IDLE;
        end
        S_DROP: if (in_valid && in_beat.last) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  // Output beats hold their contents until accepted.
  a_out_stable: assert property (@(posedge clk) disable iff (rst)
                                 out_valid && !out_ready |=> out_valid);
endmodule
