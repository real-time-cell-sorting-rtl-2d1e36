// tb_result_writeout: self-checking test of the serial class writeout.
// For each two-bit code the line is sampled every cycle and compared with
// the expected waveform: idle high, a low start bit and the two code bits
// (most significant first), each BIT_CYCLES long, then idle. The writeout
// must take 3*BIT_CYCLES cycles, 48 at the default 16 (0.192 us at 250
// MHz, the publication's 0.2 us), and refuse a new code while busy.
module tb_result_writeout;
  localparam int BC = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid, in_ready, ttl, busy;
  logic [1:0] in_code;
  result_writeout dut (.*);

  task automatic send(logic [1:0] code);
    logic [2:0] bits;
    int busy_cycles;
    bits = {1'b0, code};
    @(negedge clk);
    checks++;
    if (!in_ready || ttl !== 1'b1) begin failures++; $display("not idle before send"); end
    in_valid = 1; in_code = code;
    @(negedge clk);
    in_valid = 1; in_code = ~code;            // must be ignored while busy
    busy_cycles = 0;
    for (int b = 0; b < 3; b++)
      for (int t = 0; t < BC; t++) begin
        checks++;
        if (ttl !== bits[2 - b] || !busy || in_ready) begin
          failures++;
          $display("code %b bit %0d cycle %0d: line %b busy %b", code, b, t, ttl, busy);
        end
        busy_cycles++;
        @(negedge clk);
      end
    in_valid = 0;
    checks++;
    if (ttl !== 1'b1 || busy || busy_cycles != 3 * BC) begin
      failures++; $display("end of writeout wrong: line %b busy %b", ttl, busy);
    end
  endtask

  initial begin
    in_valid = 0; in_code = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    send(2'b01); send(2'b10); send(2'b00); send(2'b11);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
