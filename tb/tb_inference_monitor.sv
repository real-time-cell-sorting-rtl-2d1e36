// tb_inference_monitor: self-checking test of the TTL latency monitor.
// Single frames with known start-to-done distances must give a TTL high
// time of exactly that many cycles, both on the line (counted here) and in
// last_latency. Overlapping frames must keep the line high until the last
// one is done, and the frame counter must count every result.
module tb_inference_monitor;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start, done, ttl;
  logic [31:0] last_latency, frames;
  inference_monitor dut (.*);

  int hi = 0;
  always @(posedge clk) if (ttl) hi++;

  task automatic single(int len);
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    repeat (len - 1) @(negedge clk);
    done = 1;
    @(negedge clk); done = 0;
  endtask

  initial begin
    int lens [4] = '{1, 2, 17, 3625};
    start = 0; done = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    foreach (lens[i]) begin
      hi = 0;
      single(lens[i]);
      repeat (3) @(negedge clk);
      checks++;
      if (hi != lens[i] || last_latency != 32'(lens[i])) begin
        failures++;
        $display("latency %0d: line high %0d cycles, register %0d", lens[i], hi, last_latency);
      end
    end
    // overlap: start A, start B 10 cycles later, done A at 30, done B at 40
    hi = 0;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    repeat (9) @(negedge clk); start = 1; @(negedge clk); start = 0;
    repeat (19) @(negedge clk); done = 1; @(negedge clk); done = 0;
    checks++;
    if (!ttl) begin failures++; $display("line fell with a frame in flight"); end
    repeat (9) @(negedge clk); done = 1; @(negedge clk); done = 0;
    repeat (3) @(negedge clk);
    checks++;
    if (ttl || hi != 40 || last_latency != 40) begin
      failures++; $display("overlap: ttl %0b high %0d reg %0d", ttl, hi, last_latency);
    end
    // start and done in the same cycle while one frame is in flight
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    repeat (4) @(negedge clk); start = 1; done = 1; @(negedge clk); start = 0; done = 0;
    checks++;
    if (!ttl) begin failures++; $display("simultaneous start/done dropped line"); end
    repeat (4) @(negedge clk); done = 1; @(negedge clk); done = 0;
    @(negedge clk);
    checks++;
    if (ttl || frames != 32'd8) begin failures++; $display("frames %0d, ttl %0b", frames, ttl); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
