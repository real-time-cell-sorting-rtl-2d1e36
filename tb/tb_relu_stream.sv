// tb_relu_stream: self-checking test of the registered ReLU stage.
// Random vectors with random input gaps and output back-pressure; every
// output vector is compared with max(0, x) of the matching input, and a
// free-flowing run must move one vector per cycle.
module tb_relu_stream;
  import cnn_pkg::*;
  localparam int C = 4, N = 200;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid, in_ready, out_valid, out_ready;
  fx_t [C-1:0] in_data, out_data;
  relu_stream #(.C(C)) dut (.*);

  fx_t [C-1:0] q [$];
  bit bp;
  always @(negedge clk) out_ready = bp ? ($urandom_range(1) == 1) : 1'b1;

  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    for (int i = 0; i < C; i++) begin
      int e;
      e = (q.size() == 0) ? -99999 : (int'(q[0][i]) < 0 ? 0 : int'(q[0][i]));
      checks++;
      if (int'(out_data[i]) != e) begin
        failures++;
        $display("relu mismatch got %0d exp %0d", out_data[i], e);
      end
    end
    if (q.size()) void'(q.pop_front());
  end

  task automatic run(int n, bit gaps);
    for (int k = 0; k < n; k++) begin
      if (gaps) while ($urandom_range(2) == 0) begin in_valid = 0; @(negedge clk); end
      in_valid = 1;
      for (int i = 0; i < C; i++) in_data[i] = fx_t'($urandom);
      do @(posedge clk); while (!in_ready);
      q.push_back(in_data);
      @(negedge clk);
    end
    in_valid = 0;
  endtask

  initial begin
    int t0;
    in_valid = 0; in_data = '0; bp = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    t0 = $time;
    run(N, 0);
    checks++;
    if (($time - t0) / 10 != N) begin failures++; $display("throughput: %0d cycles", ($time - t0) / 10); end
    bp = 1;
    run(N, 1);
    bp = 0;
    repeat (5) @(negedge clk);
    checks++;
    if (q.size() != 0) begin failures++; $display("%0d outputs missing", q.size()); end
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
