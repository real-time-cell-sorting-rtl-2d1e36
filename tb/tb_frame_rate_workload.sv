// tb_frame_rate_workload: the classifier at the two frame rates of the
// publication's latency measurement, at its default parameters.
//
// Frames are triggered at a fixed period: 5000 cycles (50 kfps, the rate
// of the oscilloscope capture) and then 3086 cycles (81 kfps, the
// pipelined throughput), assuming a 250 MHz clock. Each frame's 2304
// pixels are delivered one per cycle from its trigger on, as a camera
// readout streamed straight into the network. For every frame the result
// code and logits must match the reference model, the inference TTL must
// show one separate pulse per frame, the result must come before the next
// trigger, and the time from the first pixel to the end of the serial
// writeout must stay within the publication's 14.5 us inference plus
// 0.2 us writeout (3675 cycles).
module tb_frame_rate_workload;
  import cnn_pkg::*;
  import cnn_ref_pkg::*;
  localparam int NPX = IMG * IMG;
  localparam int NPER = 4;                   // frames per rate
  localparam int NF = 2 * NPER;

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
  int ez0 [NF], ez1 [NF];
  longint cyc = 0;
  longint t_trig [NF], t_res [NF], t_wo_end [NF];
  int nres = 0, nwo = 0, n_pulses = 0;
  bit ttl_d = 0, busy_d = 0;

  always @(posedge clk) begin
    cyc++;
    if (rst_n && ttl_inference && !ttl_d) n_pulses++;
    ttl_d <= ttl_inference;
    if (rst_n && busy_d && !writeout_busy) begin
      if (nwo < NF) t_wo_end[nwo] = cyc;
      nwo++;
    end
    busy_d <= writeout_busy;
    if (rst_n && res_valid) begin
      checks++;
      if (int'(res_code) != code(ez0[nres], ez1[nres], 0) ||
          int'(res_logits[0]) != ez0[nres] || int'(res_logits[1]) != ez1[nres]) begin
        failures++;
        $display("frame %0d: code %0d logits %0d %0d, expected %0d %0d", nres, res_code,
                 res_logits[0], res_logits[1], ez0[nres], ez1[nres]);
      end
      t_res[nres] = cyc;
      nres++;
    end
  end

  task automatic run_rate(int first, int period);
    for (int f = first; f < first + NPER; f++) begin
      longint t0;
      t0 = cyc;
      t_trig[f] = cyc;
      for (int i = 0; i < NPX; i++) begin
        pix_valid = 1; pix_sof = (i == 0); pix_data = 8'(img[f][i]);
        do @(posedge clk); while (!pix_ready);
        @(negedge clk);
      end
      pix_valid = 0; pix_sof = 0;
      while (cyc - t0 < longint'(period)) @(negedge clk);
    end
  endtask

  initial begin
    pix_valid = 0; pix_sof = 0; pix_data = 0; cfg_we = 0; cfg_addr = 0; cfg_data = 0; tau = 0;
    params = new[N_PARAMS];
    for (int i = 0; i < N_PARAMS; i++)
      params[i] = (i < A_C1) ? int'($urandom_range(512)) - 256 :
                  (i < A_D)  ? int'($urandom_range(160)) - 80 : int'($urandom_range(80)) - 40;
    for (int f = 0; f < NF; f++) begin
      img[f] = new[NPX];
      foreach (img[f][i]) img[f][i] = int'($urandom_range(255));
      network(img[f], IMG, C0, C1, params, ez0[f], ez1[f]);
    end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < N_PARAMS; i++) begin
      @(negedge clk); cfg_we = 1; cfg_addr = 16'(i); cfg_data = 16'(params[i]);
    end
    @(negedge clk); cfg_we = 0;
    run_rate(0, 5000);                         // 50 kfps
    run_rate(NPER, 3086);                      // 81 kfps
    repeat (200) @(negedge clk);
    checks++;
    if (nres != NF || nwo != NF || n_pulses != NF) begin
      failures++; $display("results %0d, writeouts %0d, TTL pulses %0d of %0d", nres, nwo, n_pulses, NF);
    end
    for (int f = 0; f < NF && f < nres && f < nwo; f++) begin
      checks++;
      if ((f + 1 < NF && t_res[f] >= t_trig[f + 1]) || t_wo_end[f] - t_trig[f] > 3675) begin
        failures++;
        $display("frame %0d: result at +%0d, writeout end at +%0d cycles", f,
                 t_res[f] - t_trig[f], t_wo_end[f] - t_trig[f]);
      end
    end
    if (nwo > 0)
      $display("first pixel to end of writeout: %0d cycles", t_wo_end[0] - t_trig[0]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (80000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
