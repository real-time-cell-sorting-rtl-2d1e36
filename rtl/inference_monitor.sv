// inference_monitor: TTL "inference in progress" signal and latency count.
//
// The monitor watches the network's stream handshakes: start pulses when
// the first pixel of a frame enters the network, done when a result
// leaves it. It counts frames in flight; the TTL output is high while that
// count is non-zero, so on an oscilloscope its high time is the inference
// latency. The length of the last high period, in clock cycles, is kept in
// last_latency, and frames counts finished results. When frames follow
// each other closely the high periods of consecutive frames merge, as the
// inference of one frame overlaps the input of the next.
//
// Timing: ttl rises the cycle after start and falls the cycle after the
// done that empties the pipeline; last_latency is then the number of
// cycles ttl was high.
//
// From the publication: a square wave on a frame grabber TTL output whose
// high time is the inference latency, taken from the network's stream
// protocol. Own choices: the in-flight counter and the latency register.
module inference_monitor #(
  parameter int DEPTH_W = 4,
  parameter int CNT_W   = 32
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic             done,
  output logic             ttl,
  output logic [CNT_W-1:0] last_latency,
  output logic [CNT_W-1:0] frames
);
  logic [DEPTH_W-1:0] inflight, inflight_n;
  logic [CNT_W-1:0]   hi_cnt;

  always_comb
    inflight_n = inflight + DEPTH_W'(start) - DEPTH_W'(done);

  assign ttl = (inflight != '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      inflight     <= '0;
      hi_cnt       <= '0;
      last_latency <= '0;
      frames       <= '0;
    end else begin
      inflight <= inflight_n;
      if (done) frames <= frames + 1'b1;
      if (ttl) begin
        if (inflight_n == '0) begin
          last_latency <= hi_cnt + 1'b1;
          hi_cnt       <= '0;
        end else begin
          hi_cnt <= hi_cnt + 1'b1;
        end
      end
    end
  end

  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n)
                                   done |-> (inflight != '0 || start));
endmodule
