// tb_maxpool2d_stream: self-checking test of the streaming max pooling.
// An odd 7x9 frame (last row and column dropped) and an even 6x6 frame,
// both 3 channels, random values, random gaps and back-pressure; outputs
// are compared with a direct 2x2 maximum computed here, and the number of
// outputs per frame is checked.
module tb_maxpool2d_stream;
  import cnn_pkg::*;
  localparam int C = 3;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [1:0] iv, ir, ov;
  logic in_valid, out_ready, sel;
  fx_t [C-1:0] in_data, od [2];
  assign iv = {in_valid && sel, in_valid && !sel};

  maxpool2d_stream #(.IN_H(7), .IN_W(9), .C(C), .P(2)) dut_odd (
    .clk, .rst_n, .in_valid(iv[0]), .in_ready(ir[0]), .in_data,
    .out_valid(ov[0]), .out_ready, .out_data(od[0]));
  maxpool2d_stream #(.IN_H(6), .IN_W(6), .C(C), .P(2)) dut_even (
    .clk, .rst_n, .in_valid(iv[1]), .in_ready(ir[1]), .in_data,
    .out_valid(ov[1]), .out_ready, .out_data(od[1]));

  int img [8][10][C];
  int q [$];
  always @(negedge clk) out_ready = ($urandom_range(3) != 0);

  always @(posedge clk) if (rst_n && ov[sel] && out_ready)
    for (int i = 0; i < C; i++) begin
      checks++;
      if (q.size() == 0 || int'(od[sel][i]) != q[0]) begin
        failures++;
        $display("pool mismatch got %0d exp %0d", od[sel][i], q.size() ? q[0] : 0);
      end
      if (q.size()) void'(q.pop_front());
    end

  task automatic frame(int h, int w);
    for (int r = 0; r < h; r++)
      for (int c = 0; c < w; c++)
        for (int i = 0; i < C; i++) img[r][c][i] = int'($urandom_range(2000)) - 1000;
    for (int r = 0; r < h / 2; r++)
      for (int c = 0; c < w / 2; c++)
        for (int i = 0; i < C; i++) begin
          int m;
          m = img[2*r][2*c][i];
          if (img[2*r][2*c+1][i] > m) m = img[2*r][2*c+1][i];
          if (img[2*r+1][2*c][i] > m) m = img[2*r+1][2*c][i];
          if (img[2*r+1][2*c+1][i] > m) m = img[2*r+1][2*c+1][i];
          q.push_back(m);
        end
    for (int r = 0; r < h; r++)
      for (int c = 0; c < w; c++) begin
        while ($urandom_range(3) == 0) begin in_valid = 0; @(negedge clk); end
        in_valid = 1;
        for (int i = 0; i < C; i++) in_data[i] = fx_t'(img[r][c][i]);
        do @(posedge clk); while (!ir[sel]);
        @(negedge clk);
      end
    in_valid = 0;
    repeat (10) @(negedge clk);
    checks++;
    if (q.size() != 0) begin failures++; $display("%0d outputs missing", q.size()); end
  endtask

  initial begin
    in_valid = 0; in_data = '0; sel = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    frame(7, 9); frame(7, 9);
    sel = 1;
    frame(6, 6); frame(6, 6);
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
