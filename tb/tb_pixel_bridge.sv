// tb_pixel_bridge: self-checking test of the frame-grabber pixel bridge.
// Frames of 12 pixels (reduced from 48x48): pixels before the first start
// of frame are dropped, whole frames pass scaled to pixel/256 in an input
// format of 11 fraction bits (times 8; the default of 10 is covered by
// the top-level test), surplus pixels are dropped, and a short frame is padded
// with zeros while frame_err pulses. Every network-side pixel is compared
// with the expected sequence; frame_start pulses are counted.
module tb_pixel_bridge;
  import cnn_pkg::*;
  localparam int NP = 12;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic pix_valid, pix_ready, pix_sof, nn_valid, nn_ready, frame_start, frame_err;
  logic [7:0] pix_data;
  fx_t nn_pixel;
  localparam int OF = 11;
  pixel_bridge #(.NPIX(NP), .PW(8), .O_FRAC(OF)) dut (.*);

  int q [$];
  int n_start = 0, n_err = 0;
  always @(negedge clk) nn_ready = ($urandom_range(3) != 0);
  always @(posedge clk) if (rst_n) begin
    if (frame_start) n_start++;
    if (frame_err) n_err++;
    if (nn_valid && nn_ready) begin
      checks++;
      if (q.size() == 0 || int'(nn_pixel) != q[0]) begin
        failures++;
        $display("bridge got %0d exp %0d", nn_pixel, q.size() ? q[0] : -1);
      end
      if (q.size()) void'(q.pop_front());
    end
  end

  task automatic px(int v, bit sof);
    pix_valid = 1; pix_data = 8'(v); pix_sof = sof;
    do @(posedge clk); while (!pix_ready);
    @(negedge clk);
    pix_valid = 0; pix_sof = 0;
  endtask

  // n pixels of a frame; expect: forwarded count
  task automatic frame(int n, int fwd);
    for (int i = 0; i < n; i++) begin
      int v;
      v = int'($urandom_range(255));
      if (i < fwd) q.push_back(v << (OF - 8));
      px(v, i == 0);
    end
  endtask

  initial begin
    pix_valid = 0; pix_sof = 0; pix_data = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    px(7, 0); px(9, 0);                       // no start of frame yet: dropped
    frame(NP, NP);                            // whole frame
    frame(NP + 3, NP);                        // surplus dropped
    frame(5, 5);                              // short frame ...
    for (int i = 5; i < NP; i++) q.push_back(0);  // ... padded
    frame(NP, NP);
    repeat (30) @(negedge clk);
    checks++;
    if (q.size() != 0) begin failures++; $display("%0d pixels missing", q.size()); end
    checks++;
    if (n_start != 4 || n_err != 1) begin
      failures++; $display("frame_start %0d (4), frame_err %0d (1)", n_start, n_err);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
