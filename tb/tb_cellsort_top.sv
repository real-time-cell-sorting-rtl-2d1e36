// tb_cellsort_top: end-to-end test of the in-situ classifier at its
// default parameters (full 48x48 Student 2 network, 16-cycle writeout bits).
//
// The host side loads 5682 random parameters. The camera side then sends a
// sequence of frames of 8-bit pixels with a start-of-frame flag: stray
// pixels before the first frame, a normal frame, a frame with surplus
// pixels, a short frame that must be padded with zeros, a frame whose
// threshold forces a rejection, and frames with readout gaps. Frames are
// chosen so that both classes occur. For every frame the testbench checks
// the result code, class, confidence and logits against the reference
// model, decodes the serial writeout line and checks its code and its
// 48-cycle length, and checks the inference TTL high time against
// last_latency and against 14.5 us at an assumed 250 MHz (3625 cycles).
// Each mechanism (stray pixel drop, surplus drop, padding, rejection, both
// class codes, inference overlapping readout) is counted and must occur.
module tb_cellsort_top;
  import cnn_pkg::*;
  import cnn_ref_pkg::*;
  localparam int NPX = IMG * IMG;
  localparam int NF = 7;
  localparam int BC = 16;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic pix_valid, pix_ready, pix_sof, cfg_we, res_valid, res_class;
  logic ttl_inference, ttl_writeout, frame_err, writeout_busy;
  logic [7:0] pix_data;
  logic [15:0] cfg_addr, cfg_data, tau;
  logic [1:0] res_code;
  logic [16:0] res_conf;
  fx_t [1:0] res_logits;
  logic [31:0] last_latency, frames_done;

  cellsort_top dut (.*);

  int params [];
  int img [NF][];
  int ez0 [NF], ez1 [NF], etau [NF], ecode [NF];
  int nres = 0;
  longint cyc = 0;
  int n_drop = 0, n_surplus = 0, n_pad = 0, n_reject = 0, n_b = 0, n_t4 = 0, n_overlap = 0;
  bit frame_done_in [NF];

  always @(posedge clk) cyc++;

  // results
  always @(posedge clk) if (rst_n && res_valid) begin
    checks++;
    if (int'(res_code) != ecode[nres] || int'(res_logits[0]) != ez0[nres] ||
        int'(res_logits[1]) != ez1[nres] || int'(res_conf) != confidence(ez0[nres], ez1[nres]) ||
        res_class != (ez1[nres] > ez0[nres])) begin
      failures++;
      $display("frame %0d: code %0d exp %0d, logits %0d %0d exp %0d %0d", nres, res_code,
               ecode[nres], res_logits[0], res_logits[1], ez0[nres], ez1[nres]);
    end
    if (res_code == 2'b00) n_reject++;
    if (res_code == 2'b01) n_b++;
    if (res_code == 2'b10) n_t4++;
    if (!frame_done_in[nres]) n_overlap++;    // result before the frame was fully read in
    nres++;
  end

  // writeout line decoder: falling edge starts a frame, sample mid-bit
  int nwo = 0;
  initial begin
    forever begin
      logic [1:0] got;
      int len;
      @(negedge ttl_writeout);
      @(negedge clk);
      repeat (BC / 2) @(negedge clk);
      checks++;
      if (ttl_writeout !== 1'b0) begin failures++; $display("start bit missing"); end
      repeat (BC) @(negedge clk); got[1] = ttl_writeout;
      repeat (BC) @(negedge clk); got[0] = ttl_writeout;
      len = 2 * BC + BC / 2;
      while (ttl_writeout == 1'b0 || writeout_busy) begin @(negedge clk); len++; end
      checks++;
      if (int'(got) != ecode[nwo] || len > 3 * BC + 1 || len < 3 * BC - 1) begin
        failures++;
        $display("writeout %0d: code %b exp %0d, %0d cycles", nwo, got, ecode[nwo], len);
      end
      nwo++;
    end
  end

  // inference TTL: count high time and compare with the latency register
  int hi = 0, n_hi = 0;
  always @(posedge clk) begin
    if (!rst_n) hi = 0;
    else if (ttl_inference) hi++;
    else if (hi != 0) begin
      #1;
      checks++;
      n_hi++;
      if (n_hi == 1) $display("inference TTL high for %0d cycles", hi);
      if (last_latency != 32'(hi) || hi > 3625) begin
        failures++; $display("TTL high %0d cycles, register %0d", hi, last_latency);
      end
      hi = 0;
    end
  end

  task automatic px(int v, bit sof, bit gaps);
    if (gaps) while ($urandom_range(3) == 0) begin pix_valid = 0; @(negedge clk); end
    pix_valid = 1; pix_data = 8'(v); pix_sof = sof;
    do @(posedge clk); while (!pix_ready);
    @(negedge clk);
    pix_valid = 0; pix_sof = 0;
  endtask

  task automatic send(int f, int n, bit gaps);
    tau = 16'(etau[f]);
    for (int i = 0; i < n; i++) px(img[f][i % NPX], i == 0, gaps);
    frame_done_in[f] = 1;
  endtask

  // random frame whose reference class is cls (or either for cls < 0)
  task automatic pick(int f, int cls, int npass);
    for (int tries = 0; tries < 40; tries++) begin
      img[f] = new[NPX];
      foreach (img[f][i]) img[f][i] = (i < npass) ? int'($urandom_range(255)) : 0;
      network(img[f], IMG, C0, C1, params, ez0[f], ez1[f]);
      if (cls < 0 || int'(ez1[f] > ez0[f]) == cls) break;
    end
  endtask

  initial begin
    pix_valid = 0; pix_sof = 0; pix_data = 0; cfg_we = 0; cfg_addr = 0; cfg_data = 0; tau = 0;
    params = new[N_PARAMS];
    for (int i = 0; i < N_PARAMS; i++)
      params[i] = (i < A_C1) ? int'($urandom_range(512)) - 256 :
                  (i < A_D)  ? int'($urandom_range(160)) - 80 : int'($urandom_range(80)) - 40;
    pick(0, 0, NPX);
    pick(1, 1, NPX);
    pick(2, -1, 700);                          // short frame: 700 pixels then zero padding
    pick(3, -1, NPX);
    pick(4, 0, NPX);
    pick(5, 1, NPX);
    pick(6, -1, NPX);
    for (int f = 0; f < NF; f++) begin
      etau[f] = (f == 3) ? confidence(ez0[f], ez1[f]) + 1 : (f == 6 ? 32768 : 0);
      ecode[f] = code(ez0[f], ez1[f], etau[f]);
    end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < N_PARAMS; i++) begin
      @(negedge clk); cfg_we = 1; cfg_addr = 16'(i); cfg_data = 16'(params[i]);
    end
    @(negedge clk); cfg_we = 0;

    px(11, 0, 0); px(22, 0, 0); px(33, 0, 0);  // stray pixels: dropped
    send(0, NPX, 0);
    send(1, NPX + 5, 0);                       // 5 surplus pixels: dropped
    tau = 0;
    for (int i = 0; i < 700; i++) px(img[2][i], i == 0, 0);   // short frame
    frame_done_in[2] = 1;
    send(3, NPX, 0);                           // padding happens when this frame starts
    send(4, NPX, 1);
    send(5, NPX, 1);
    send(6, NPX, 0);
    repeat (3000) @(negedge clk);

    checks++;
    if (nres != NF || nwo != NF || frames_done != NF) begin
      failures++; $display("results %0d, writeouts %0d, counter %0d", nres, nwo, frames_done);
    end
    $display("mechanisms: drop %0d surplus %0d pad %0d reject %0d B %0d T4 %0d overlap %0d ttl %0d",
             n_drop, n_surplus, n_pad, n_reject, n_b, n_t4, n_overlap, n_hi);
    checks++;
    if (n_drop != 3 || n_surplus != 5 || n_pad == 0 || n_reject == 0 || n_b == 0 || n_t4 == 0 || n_overlap == 0 || n_hi == 0) begin
      failures++; $display("a mechanism never occurred");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && frame_err) n_pad++;

  // pixels taken from the camera side but not passed to the network
  always @(posedge clk) if (rst_n && pix_valid && pix_ready && !(dut.nn_valid && dut.nn_ready)) begin
    if (nres == 0 && !frame_done_in[0]) n_drop++; else n_surplus++;
  end

  initial begin
    repeat (80000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
