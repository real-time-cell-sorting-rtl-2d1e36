// tb_conv2d_stream: self-checking test of the streaming convolution.
//
// Two instances on a small 7x6 frame with 2 input and 4 output channels:
// reuse factor 1 at the default number format, and reuse factor 2 with
// its own formats (input 9, weights 12, output 8 fraction bits, so 13 bits
// are dropped and the bias is aligned by 9). Random weights, biases and pixels;
// every output pixel is compared with a direct convolution computed here.
// Each instance runs one frame with a free-flowing output, where the cycle
// count from first to last accepted input must be
// H*W + ((H-K+1)*(W-K+1)-1)*(RF-1), and two frames with random
// input gaps and output back-pressure. Saturation is provoked in one frame
// by large weights.
module tb_conv2d_stream;
  import cnn_pkg::*;

  localparam int H = 7, W = 6, CI = 2, CO = 4, KK = 3;
  localparam int OH = H - KK + 1, OW = W - KK + 1;
  localparam int NW = KK * KK * CI * CO;
  localparam int FI2 = 9, FW2 = 12, FO2 = 8;   // formats of the RF 2 instance

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  logic          sel;                 // 0: RF 1 instance, 1: RF 2 instance
  logic          in_valid;
  fx_t [CI-1:0]  in_data;
  logic [1:0]    iv, ir, ov, orr;
  fx_t [CO-1:0]  od [2];
  logic          cfg_we;
  logic [15:0]   cfg_addr;
  fx_t           cfg_data;
  logic          out_ready;

  assign iv[0] = in_valid && !sel;
  assign iv[1] = in_valid &&  sel;
  assign orr   = {out_ready, out_ready};

  conv2d_stream #(.IN_H(H), .IN_W(W), .CIN(CI), .COUT(CO), .KS(KK), .RF(1)) dut1 (
    .clk, .rst_n, .in_valid(iv[0]), .in_ready(ir[0]), .in_data,
    .out_valid(ov[0]), .out_ready(orr[0]), .out_data(od[0]),
    .cfg_we, .cfg_addr, .cfg_data);
  conv2d_stream #(.IN_H(H), .IN_W(W), .CIN(CI), .COUT(CO), .KS(KK), .RF(2),
                  .IN_FRAC(FI2), .W_FRAC(FW2), .O_FRAC(FO2)) dut2 (
    .clk, .rst_n, .in_valid(iv[1]), .in_ready(ir[1]), .in_data,
    .out_valid(ov[1]), .out_ready(orr[1]), .out_data(od[1]),
    .cfg_we, .cfg_addr, .cfg_data);

  int wt [NW];
  int bs [CO];
  int img [H][W][CI];
  int exp_q [$];
  int got;

  function automatic int sat16(longint v, int sh);
    longint s;
    s = v >>> sh;
    if (s > 32767) return 32767;
    if (s < -32768) return -32768;
    return int'(s);
  endfunction

  task automatic load_params(int wmax);
    for (int i = 0; i < NW + CO; i++) begin
      int v;
      v = int'($urandom_range(2 * wmax)) - wmax;
      if (i < NW) wt[i] = v; else bs[i - NW] = v;
      @(negedge clk);
      cfg_we = 1; cfg_addr = 16'(i); cfg_data = fx_t'(v);
    end
    @(negedge clk) cfg_we = 0;
  endtask

  task automatic make_frame(int pmax);
    exp_q.delete();
    for (int r = 0; r < H; r++)
      for (int c = 0; c < W; c++)
        for (int i = 0; i < CI; i++) img[r][c][i] = int'($urandom_range(2 * pmax)) - pmax;
    for (int r = 0; r < OH; r++)
      for (int c = 0; c < OW; c++)
        for (int o = 0; o < CO; o++) begin
          longint a;
          a = longint'(bs[o]) <<< (sel ? FI2 : FRAC);
          for (int ky = 0; ky < KK; ky++)
            for (int kx = 0; kx < KK; kx++)
              for (int i = 0; i < CI; i++)
                a += longint'(img[r + ky][c + kx][i]) * wt[((ky * KK + kx) * CI + i) * CO + o];
          exp_q.push_back(sat16(a, sel ? FI2 + FW2 - FO2 : FRAC));
        end
  endtask

  // send one frame; gaps: random input idles
  task automatic send_frame(bit gaps);
    for (int r = 0; r < H; r++)
      for (int c = 0; c < W; c++) begin
        if (gaps) while ($urandom_range(3) == 0) begin
          in_valid = 0; @(negedge clk);
        end
        in_valid = 1;
        for (int i = 0; i < CI; i++) in_data[i] = fx_t'(img[r][c][i]);
        do @(posedge clk); while (!(sel ? ir[1] : ir[0]));
        @(negedge clk);
      end
    in_valid = 0;
  endtask

  // output checker
  int nout;
  always @(posedge clk) begin
    if (rst_n && ov[sel] && out_ready) begin
      for (int o = 0; o < CO; o++) begin
        got = int'(od[sel][o]);
        checks++;
        if (exp_q.size() == 0 || got != exp_q[0]) begin
          failures++;
          if (failures < 10) $display("conv mismatch sel=%0d px=%0d ch=%0d got %0d exp %0d",
                                      sel, nout, o, got, exp_q.size() ? exp_q[0] : 0);
        end
        if (exp_q.size()) void'(exp_q.pop_front());
      end
      nout++;
    end
  end

  always @(negedge clk) if (rst_n && !sel_free) out_ready = ($urandom_range(2) != 0);
  bit sel_free;

  initial begin
    int t0, t1, nexp;
    in_valid = 0; cfg_we = 0; cfg_addr = 0; cfg_data = 0; in_data = '0;
    out_ready = 1; sel = 0; sel_free = 1; nout = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int s = 0; s < 2; s++) begin
      sel = s[0];
      load_params(600);
      // frame 1: free output, exact cycle count
      make_frame(1200);
      sel_free = 1; out_ready = 1;
      @(negedge clk);
      t0 = $time;
      send_frame(0);
      t1 = $time;
      nexp = H * W + (OH * OW - 1) * s;   // the last window finishes after the last input
      checks++;
      if ((t1 - t0) / 10 != nexp) begin
        failures++;
        $display("cycle count RF=%0d: %0d, expected %0d", s + 1, (t1 - t0) / 10, nexp);
      end
      repeat (5) @(negedge clk);
      // frames 2 and 3: gaps and back-pressure, frame 3 saturating
      for (int f = 0; f < 2; f++) begin
        if (f == 1) load_params(16000);
        make_frame(f ? 30000 : 1200);
        sel_free = 0;
        send_frame(1);
        repeat (40) @(negedge clk);
        sel_free = 1; out_ready = 1;
        repeat (10) @(negedge clk);
        checks++;
        if (exp_q.size() != 0) begin
          failures++;
          $display("missing %0d outputs", exp_q.size());
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
