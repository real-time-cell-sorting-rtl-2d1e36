// conv2d_stream: streaming KxK "valid" convolution with a reuse factor.
//
// Pixels arrive one per handshake in raster order, each a vector of CIN
// channels. K-1 line buffers hold the previous image rows; a KxK window
// register shifts one column per accepted pixel. Once the window covers a
// full KxK patch (row >= K-1 and column >= K-1), the output pixel for that
// patch is computed. The layer has K*K*CIN*COUT/RF multipliers: with a reuse
// factor RF the COUT output channels are produced in RF groups of COUT/RF,
// one group per clock, so an output pixel takes RF cycles, during which the
// input is held off. With RF = 1 the layer accepts one pixel per cycle.
//
// Interface: in_valid/in_ready/in_data, out_valid/out_ready/out_data, a
// valid/ready handshake (data moves when both are high; a held valid keeps
// its data). Frames have a fixed size IN_H x IN_W and are counted, not
// marked. Weights and biases are loaded through cfg_we/cfg_addr/cfg_data:
// local address ((ky*K+kx)*CIN+ci)*COUT+co for a weight, K*K*CIN*COUT+co
// for a bias.
//
// Timing: an output pixel is registered RF cycles after the pixel that
// completes its window is accepted (1 cycle for RF = 1).
//
// From the publication: the sliding-window/line-buffer structure, 3x3
// kernels, the reuse factors (1 for conv_0, 2 for conv_1) and the channel
// counts implied by the parameter count. Own choices: the way work is split
// over the RF cycles (by output channel group), the number format and its
// defaults (see cnn_pkg; the per-layer formats follow the publication's
// layer-level quantization), no padding, stride 1.
module conv2d_stream
  import cnn_pkg::*;
#(
  parameter int IN_H = 48,
  parameter int IN_W = 48,
  parameter int CIN  = 1,
  parameter int COUT = 16,
  parameter int KS   = 3,
  parameter int RF   = 1,
  parameter int IN_FRAC = FRAC,      // fraction bits of the input pixels
  parameter int W_FRAC  = FRAC,      // of the weights and biases
  parameter int O_FRAC  = FRAC       // of the output pixels
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                in_valid,
  output logic                in_ready,
  input  fx_t [CIN-1:0]       in_data,
  output logic                out_valid,
  input  logic                out_ready,
  output fx_t [COUT-1:0]      out_data,
  input  logic                cfg_we,
  input  logic [15:0]         cfg_addr,
  input  fx_t                 cfg_data
);
  localparam int NW  = KS * KS * CIN * COUT;
  localparam int CPG = COUT / RF;               // output channels per cycle
  localparam int RW  = (RF > 1) ? $clog2(RF) : 1;
  localparam int XW  = $clog2(IN_W + 1);
  localparam int YW  = $clog2(IN_H + 1);
  localparam int SH  = IN_FRAC + W_FRAC - O_FRAC;  // bits dropped by requant

  typedef fx_t [CIN-1:0]  pin_t;
  typedef fx_t [COUT-1:0] pout_t;

  initial begin
    assert (COUT % RF == 0) else $fatal(1, "COUT must be a multiple of RF");
    assert (SH >= 0) else $fatal(1, "output format finer than input times weight");
  end

  fx_t   w    [NW];
  fx_t   bias [COUT];
  pin_t  lb   [KS-1][IN_W];      // lb[0] oldest row
  pin_t  win  [KS][KS];          // win[ky][kx], kx = KS-1 newest column
  pout_t stage;
  logic  busy;
  logic  [RW-1:0] ph;
  logic  [XW-1:0] col;
  logic  [YW-1:0] row;

  logic out_free, finish, accept, advance, win_ok;
  assign out_free = !out_valid || out_ready;
  assign finish   = busy && (int'(ph) == RF - 1) && out_free;
  assign advance  = busy && ((int'(ph) != RF - 1) || out_free);
  assign in_ready = !busy || finish;
  assign accept   = in_valid && in_ready;
  assign win_ok   = (int'(row) >= KS - 1) && (int'(col) >= KS - 1);

  // multiply-accumulate for the current output channel group
  acc_t  acc [CPG];
  pout_t next_out;
  always_comb begin
    for (int j = 0; j < CPG; j++) begin
      int o;
      o = int'(ph) * CPG + j;
      acc[j] = acc_t'(bias[o]) <<< IN_FRAC;
      for (int ky = 0; ky < KS; ky++)
        for (int kx = 0; kx < KS; kx++)
          for (int ci = 0; ci < CIN; ci++)
            acc[j] += acc_t'(win[ky][kx][ci]) *
                      acc_t'(w[((ky * KS + kx) * CIN + ci) * COUT + o]);
    end
    next_out = stage;
    for (int j = 0; j < CPG; j++)
      next_out[int'(ph) * CPG + j] = requant(acc[j], SH);
  end

  // parameter loading
  always_ff @(posedge clk) begin
    if (cfg_we) begin
      if (int'(cfg_addr) < NW) w[int'(cfg_addr)] <= cfg_data;
      else if (int'(cfg_addr) < NW + COUT) bias[int'(cfg_addr) - NW] <= cfg_data;
    end
  end

  // line buffers and window (no reset needed: contents are only used
  // once overwritten by the current frame)
  always_ff @(posedge clk) begin
    if (accept) begin
      for (int k = 0; k < KS - 1; k++)
        lb[k][col] <= (k == KS - 2) ? in_data : lb[k + 1][col];
      for (int ky = 0; ky < KS; ky++) begin
        for (int kx = 0; kx < KS - 1; kx++) win[ky][kx] <= win[ky][kx + 1];
        win[ky][KS - 1] <= (ky == KS - 1) ? in_data : lb[ky][col];
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy      <= 1'b0;
      ph        <= '0;
      col       <= '0;
      row       <= '0;
      out_valid <= 1'b0;
      out_data  <= '0;
      stage     <= '0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (advance) begin
        stage <= next_out;
        if (int'(ph) == RF - 1) begin
          ph        <= '0;
          out_valid <= 1'b1;
          out_data  <= next_out;
        end else begin
          ph <= ph + 1'b1;
        end
      end
      if (finish) busy <= 1'b0;
      if (accept) begin
        if (win_ok) busy <= 1'b1;
        if (int'(col) == IN_W - 1) begin
          col <= '0;
          row <= (int'(row) == IN_H - 1) ? '0 : row + 1'b1;
        end else begin
          col <= col + 1'b1;
        end
      end
    end
  end

  // handshake rule: a presented output holds until taken
  property p_hold;
    @(posedge clk) disable iff (!rst_n)
      out_valid && !out_ready |=> out_valid && $stable(out_data);
  endproperty
  a_hold: assert property (p_hold);

endmodule
