// tb_softmax_threshold: self-checking test of the two-class softmax,
// argmax and rejection comparator.
// Random logit pairs over the whole range, pairs close to each segment
// boundary of the sigmoid, equal logits, and random thresholds. The
// expected confidence is computed here in real arithmetic from the
// piecewise-linear sigmoid, the expected code from its comparison with the
// threshold. Results must appear one cycle after the input.
module tb_softmax_threshold;
  import cnn_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid, in_ready, out_valid, out_ready, out_class;
  fx_t [1:0] in_logits;
  logic [15:0] tau;
  logic [1:0] out_code;
  logic [16:0] out_conf;
  softmax_threshold dut (.*);

  int n_reject = 0, n_b = 0, n_t4 = 0;

  task automatic one(int z0, int z1, int t);
    real d, p;
    int ep, ecode, ecls;
    @(negedge clk);
    in_valid = 1; in_logits[0] = fx_t'(z0); in_logits[1] = fx_t'(z1); tau = 16'(t);
    @(negedge clk);
    in_valid = 0;
    d = (z1 > z0 ? z1 - z0 : z0 - z1) / 1024.0;
    if (d >= 5.0)        p = 1.0;
    else if (d >= 2.375) p = d / 32.0 + 0.84375;
    else if (d >= 1.0)   p = d / 8.0 + 0.625;
    else                 p = d / 4.0 + 0.5;
    ep = int'(p * 65536.0);
    ecls = (z1 > z0) ? 1 : 0;
    ecode = (ep < t) ? 0 : (ecls ? 2 : 1);
    if (ecode == 0) n_reject++; else if (ecode == 1) n_b++; else n_t4++;
    checks++;
    if (!out_valid || int'(out_conf) != ep || int'(out_code) != ecode || int'(out_class) != ecls) begin
      failures++;
      $display("z0=%0d z1=%0d tau=%0d: valid %0b conf %0d/%0d code %0d/%0d",
               z0, z1, t, out_valid, out_conf, ep, out_code, ecode);
    end
  endtask

  initial begin
    int bnd [3] = '{1024, 2432, 5120};
    in_valid = 0; out_ready = 1; in_logits = '0; tau = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    one(100, 100, 32768);                     // tie: class 0, p = 0.5
    one(0, 0, 32769);                         // tie below a threshold just over 0.5
    for (int k = 0; k < 3; k++)
      for (int e = -2; e <= 2; e++) begin
        one(-300, -300 + bnd[k] + e, 50000);
        one(700 + bnd[k] + e, 700, 60000);
      end
    // the seven rejection thresholds evaluated in the publication, tau in
    // 16 fraction bits, each against logit differences across the PLAN range
    for (int k = 0; k < 7; k++) begin
      int taus [7] = '{32768, 45875, 52429, 55706, 58982, 62259, 64881};
      for (int d = 0; d <= 6144; d += 96) begin
        one(-2000, -2000 + d, taus[k]);
        one(1500 + d, 1500, taus[k]);
      end
    end
    for (int i = 0; i < 600; i++)
      one(int'($urandom_range(65535)) - 32768 >>> ($urandom_range(3) * 2),
          int'($urandom_range(65535)) - 32768 >>> ($urandom_range(3) * 2),
          int'($urandom_range(65535)));
    checks++;
    if (n_reject == 0 || n_b == 0 || n_t4 == 0) begin
      failures++; $display("codes not all seen %0d %0d %0d", n_reject, n_b, n_t4);
    end
    // back-pressure: a held result stays
    @(negedge clk); in_valid = 1; in_logits[0] = 0; in_logits[1] = 16'sd2000; tau = 0; out_ready = 0;
    @(negedge clk); in_valid = 1; in_logits[0] = 16'sd2000; in_logits[1] = 0;
    @(negedge clk); in_valid = 0;
    checks++;
    if (!out_valid || out_code != 2'b10 || in_ready) begin failures++; $display("hold failed"); end
    out_ready = 1;
    @(negedge clk);
    checks++;
    if (out_valid) begin failures++; $display("second input taken while stalled"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
