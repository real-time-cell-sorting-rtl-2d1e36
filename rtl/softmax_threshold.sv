// softmax_threshold: two-class softmax confidence, argmax and rejection.
//
// For two classes the softmax probability of the larger logit is
// sigmoid(d) with d = |z1 - z0|, so the layer needs one subtraction and
// one sigmoid. The sigmoid is the piecewise-linear PLAN approximation,
// which uses only shifts and adds:
//   d >= 5          : 1
//   2.375 <= d < 5  : d/32 + 0.84375
//   1 <= d < 2.375  : d/8  + 0.625
//   0 <= d < 1      : d/4  + 0.5
// The winning class is 1 if z1 > z0, else 0. A comparator checks the
// confidence against the runtime threshold tau; below it the cell is
// rejected (sent to the discard channel). The two-bit result code is
// 2'b01 for class 0 (B cell), 2'b10 for class 1 (T4 cell), 2'b00 for a
// rejected cell. With tau at 0.5 or below nothing is rejected.
//
// The difference is first brought to 16 fraction bits (floored when the
// logits have more), so the segment tests and slopes do not depend on the
// logit format L_FRAC.
//
// Interface: valid/ready input of two logits (cnn_pkg fixed point), tau as
// unsigned with 16 fraction bits, registered valid/ready output of the
// code, the class and the confidence (17 bits, 16 fraction bits, 1.0 =
// 65536). One cycle of latency, one result per cycle.
//
// From the publication: softmax output of the network, the comparator of
// the highest probability against a runtime threshold tau, the two-bit
// class output. Own choices: the PLAN sigmoid, the code assignment, the
// threshold format.
module softmax_threshold
  import cnn_pkg::*;
#(
  parameter int L_FRAC = FRAC        // fraction bits of the logits
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                in_valid,
  output logic                in_ready,
  input  fx_t [1:0]           in_logits,
  input  logic [15:0]         tau,
  output logic                out_valid,
  input  logic                out_ready,
  output logic [1:0]          out_code,
  output logic                out_class,
  output logic [16:0]         out_conf
);
  logic signed [DW:0] diff;
  logic        [DW:0] d;        // |z1 - z0|, L_FRAC fraction bits
  logic        [39:0] d16;      // same with 16 fraction bits (floored)
  logic        [16:0] p;
  logic               cls;

  always_comb begin
    diff = {in_logits[1][DW-1], in_logits[1]} - {in_logits[0][DW-1], in_logits[0]};
    cls  = diff > 0;
    d    = diff[DW] ? (DW+1)'(-diff) : (DW+1)'(diff);
    d16  = (40'(d) << 16) >> L_FRAC;
    if (d16 >= 40'(5 << 16))                 p = 17'd65536;
    else if (d16 >= 40'((19 << 16) / 8))     p = 17'(d16 >> 5) + 17'd55296;
    else if (d16 >= 40'(1 << 16))            p = 17'(d16 >> 3) + 17'd40960;
    else                                     p = 17'(d16 >> 2) + 17'd32768;
  end

  assign in_ready = !out_valid || out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_code  <= CODE_REJECT;
      out_class <= 1'b0;
      out_conf  <= '0;
    end else if (in_ready) begin
      out_valid <= in_valid;
      if (in_valid) begin
        out_class <= cls;
        out_conf  <= p;
        if (p < {1'b0, tau}) out_code <= CODE_REJECT;
        else                 out_code <= cls ? CODE_T4 : CODE_B;
      end
    end
  end
endmodule
