// tb_student2_cnn: self-checking test of the whole Student 2 network at
// its default size (48x48 input, 16/16 channels, reuse factors 1, 2, 25).
// All 5682 parameters are loaded with random values through the
// configuration port. Six random frames are streamed: four back to back
// with a free output, two with random output back-pressure and input
// gaps. Each result (logits, class, confidence, code) is compared with the
// reference model in cnn_ref_pkg. One frame uses a threshold just above
// its confidence so it must be rejected. Timing checks at an assumed
// 250 MHz clock: first pixel to result within 14.5 us (3625 cycles), and
// back-to-back frames accepted without input stalls, i.e. one frame per
// 2304 cycles, faster than the 81 kfps (3086 cycles) of the publication.
// A second instance with other per-layer number formats (conv_0 weights
// 12, output 9; conv_1 weights 11, output 10; dense_0 weights 12, logits
// 11 fraction bits) gets the same stream and parameters; its results must
// match the reference model run with those formats, and its handshakes
// must follow the first instance cycle for cycle.
module tb_student2_cnn;
  import cnn_pkg::*;
  import cnn_ref_pkg::*;
  localparam int NPX = IMG * IMG;
  localparam int NF = 6;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid, in_ready, cfg_we, out_valid, out_ready, out_class;
  fx_t in_pixel, cfg_data;
  logic [15:0] cfg_addr, tau;
  logic [1:0] out_code;
  logic [16:0] out_conf;
  fx_t [1:0] out_logits;
  student2_cnn dut (.*);

  localparam int FQ [7] = '{10, 12, 9, 11, 10, 12, 11};
  logic q_in_ready, q_valid, q_class;
  logic [1:0] q_code;
  logic [16:0] q_conf;
  fx_t [1:0] q_logits;
  student2_cnn #(.PIX_FRAC(FQ[0]), .W0_FRAC(FQ[1]), .A0_FRAC(FQ[2]), .W1_FRAC(FQ[3]),
                 .A1_FRAC(FQ[4]), .WD_FRAC(FQ[5]), .Z_FRAC(FQ[6])) dutq (
    .clk, .rst_n, .in_valid, .in_ready(q_in_ready), .in_pixel, .cfg_we, .cfg_addr, .cfg_data,
    .tau, .out_valid(q_valid), .out_ready, .out_code(q_code), .out_class(q_class),
    .out_conf(q_conf), .out_logits(q_logits));
  int qz0 [6], qz1 [6];
  int nq = 0, n_hs_diff = 0;

  always @(posedge clk) if (rst_n) begin
    if (q_in_ready != in_ready || q_valid != out_valid) n_hs_diff++;
    if (q_valid && out_ready) begin
      checks++;
      if (int'(q_logits[0]) != qz0[nq] || int'(q_logits[1]) != qz1[nq] ||
          int'(q_code) != code(qz0[nq], qz1[nq], etau[nq], FQ[6]) ||
          int'(q_conf) != confidence(qz0[nq], qz1[nq], FQ[6]) || q_class != (qz1[nq] > qz0[nq])) begin
        failures++;
        $display("formats: frame %0d: logits %0d %0d (exp %0d %0d) code %0d conf %0d (exp %0d)",
                 nq, q_logits[0], q_logits[1], qz0[nq], qz1[nq], q_code, q_conf,
                 confidence(qz0[nq], qz1[nq], FQ[6]));
      end
      nq++;
    end
  end

  int params [];
  int frames [NF][];
  int ez0 [NF], ez1 [NF], etau [NF];
  int nres = 0;
  longint cyc = 0;
  longint t_first [NF];
  longint t_res [NF];
  int n_stall = 0, n_reject = 0;
  bit bp = 0;

  always @(posedge clk) cyc++;
  always @(negedge clk) out_ready = bp ? ($urandom_range(1) == 1) : 1'b1;

  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    int ec;
    t_res[nres] = cyc;
    ec = code(ez0[nres], ez1[nres], etau[nres]);
    if (ec == 0) n_reject++;
    checks++;
    if (int'(out_logits[0]) != ez0[nres] || int'(out_logits[1]) != ez1[nres] ||
        int'(out_code) != ec || int'(out_conf) != confidence(ez0[nres], ez1[nres]) ||
        out_class != (ez1[nres] > ez0[nres])) begin
      failures++;
      $display("frame %0d: logits %0d %0d (exp %0d %0d) code %0d (exp %0d) conf %0d",
               nres, out_logits[0], out_logits[1], ez0[nres], ez1[nres], out_code, ec, out_conf);
    end
    nres++;
  end

  task automatic send(int f, bit gaps);
    for (int i = 0; i < NPX; i++) begin
      if (gaps) while ($urandom_range(7) == 0) begin in_valid = 0; @(negedge clk); end
      in_valid = 1;
      in_pixel = fx_t'(frames[f][i] * 4);
      tau = 16'(etau[f]);
      do begin
        @(posedge clk);
        if (!in_ready) n_stall++;
      end while (!in_ready);
      if (i == 0) t_first[f] = cyc;
      @(negedge clk);
    end
    in_valid = 0;
  endtask

  initial begin
    in_valid = 0; cfg_we = 0; cfg_addr = 0; cfg_data = 0; in_pixel = 0; tau = 0;
    params = new[N_PARAMS];
    for (int i = 0; i < N_PARAMS; i++)
      params[i] = (i < A_C1) ? int'($urandom_range(512)) - 256 :
                  (i < A_D)  ? int'($urandom_range(160)) - 80 : int'($urandom_range(80)) - 40;
    for (int f = 0; f < NF; f++) begin
      frames[f] = new[NPX];
      foreach (frames[f][i]) frames[f][i] = int'($urandom_range(255));
      network(frames[f], IMG, C0, C1, params, ez0[f], ez1[f]);
      network_q(frames[f], IMG, C0, C1, params, FQ, qz0[f], qz1[f]);
      etau[f] = (f == 2) ? confidence(ez0[f], ez1[f]) + 1 : 0;
    end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < N_PARAMS; i++) begin
      @(negedge clk); cfg_we = 1; cfg_addr = 16'(i); cfg_data = fx_t'(params[i]);
    end
    @(negedge clk); cfg_we = 0;
    for (int f = 0; f < 4; f++) send(f, 0);
    checks++;
    if (n_stall != 0) begin failures++; $display("input stalled %0d cycles at full rate", n_stall); end
    repeat (4000) @(negedge clk);
    bp = 1;
    for (int f = 4; f < NF; f++) send(f, 1);
    repeat (4000) @(negedge clk);
    checks++;
    if (nres != NF) begin failures++; $display("%0d results, expected %0d", nres, NF); end
    checks++;
    if (nq != NF || n_hs_diff != 0) begin
      failures++; $display("format instance: %0d results, %0d cycles of differing handshakes", nq, n_hs_diff);
    end
    for (int f = 0; f < 4; f++) begin
      $display("frame %0d: first pixel to result %0d cycles", f, t_res[f] - t_first[f]);
      checks++;
      if (t_res[f] - t_first[f] > 3625) begin failures++; $display("latency over 14.5 us at 250 MHz"); end
    end
    for (int f = 1; f < 4; f++) begin
      checks++;
      if (t_first[f] - t_first[f - 1] != NPX) begin
        failures++; $display("frame interval %0d cycles", t_first[f] - t_first[f - 1]);
      end
    end
    checks++;
    if (n_reject != 1) begin failures++; $display("%0d rejections, expected 1", n_reject); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
