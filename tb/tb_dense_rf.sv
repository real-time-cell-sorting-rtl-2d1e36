// tb_dense_rf: self-checking test of the dense layer at its default size
// (1600 inputs in beats of 16, 2 outputs, reuse factor 25).
// Random weights, biases and features; four frames, the last with weights
// large enough to saturate. Each pair of logits is compared with a direct
// dot product computed here, and the number of cycles from the last input
// beat to the result must equal the reuse factor.
module tb_dense_rf;
  import cnn_pkg::*;
  localparam int NI = 1600, NO = 2, IC = 16, RFX = 25;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid, in_ready, out_valid, out_ready, cfg_we;
  fx_t [IC-1:0] in_data;
  fx_t [NO-1:0] out_data;
  logic [15:0] cfg_addr;
  fx_t cfg_data;

  dense_rf dut (.*);

  int wt [NI * NO];
  int bs [NO];
  int x [NI];

  function automatic int sat16(longint v);
    longint s;
    s = v >>> 10;
    if (s > 32767) return 32767;
    if (s < -32768) return -32768;
    return int'(s);
  endfunction

  task automatic load(int wmax);
    for (int i = 0; i < NI * NO + NO; i++) begin
      int v;
      v = int'($urandom_range(2 * wmax)) - wmax;
      if (i < NI * NO) wt[i] = v; else bs[i - NI * NO] = v;
      @(negedge clk); cfg_we = 1; cfg_addr = 16'(i); cfg_data = fx_t'(v);
    end
    @(negedge clk) cfg_we = 0;
  endtask

  initial begin
    in_valid = 0; out_ready = 0; cfg_we = 0; cfg_addr = 0; cfg_data = 0; in_data = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int f = 0; f < 4; f++) begin
      int lat;
      if (f == 0) load(300);
      if (f == 3) load(30000);
      for (int i = 0; i < NI; i++) x[i] = int'($urandom_range(4000)) - 2000;
      for (int b = 0; b < NI / IC; b++) begin
        if (f[0]) while ($urandom_range(2) == 0) begin in_valid = 0; @(negedge clk); end
        in_valid = 1;
        for (int i = 0; i < IC; i++) in_data[i] = fx_t'(x[b * IC + i]);
        do @(posedge clk); while (!in_ready);
        @(negedge clk);
      end
      in_valid = 0;
      lat = 0;
      while (!out_valid) begin @(negedge clk); lat++; end
      checks++;
      if (lat != RFX) begin failures++; $display("latency %0d, expected %0d", lat, RFX); end
      if (f[1]) repeat ($urandom_range(5)) @(negedge clk);
      for (int o = 0; o < NO; o++) begin
        longint a;
        a = longint'(bs[o]) <<< 10;
        for (int i = 0; i < NI; i++) a += longint'(x[i]) * wt[i * NO + o];
        checks++;
        if (int'(out_data[o]) != sat16(a)) begin
          failures++;
          $display("frame %0d logit %0d got %0d exp %0d", f, o, out_data[o], sat16(a));
        end
      end
      out_ready = 1;
      @(negedge clk);
      out_ready = 0;
      checks++;
      if (out_valid || !in_ready) begin failures++; $display("result not released"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
