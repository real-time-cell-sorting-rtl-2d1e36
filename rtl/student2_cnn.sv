// student2_cnn: the Student 2 classifier as one streaming network.
//
// Layer chain, each a valid/ready stream stage, so several frames can be in
// different layers at once (layer-level pipelining):
//   48x48x1 pixels
//   -> conv_0 3x3, 16 ch, reuse 1  (46x46x16) -> ReLU -> 2x2 pool (23x23x16)
//   -> conv_1 3x3, 16 ch, reuse 2  (21x21x16) -> ReLU -> 2x2 pool (10x10x16)
//   -> dense_0 1600 -> 2, reuse 25 -> two-class softmax and threshold
// giving 144 + 1152 + 128 multipliers and 5682 parameters.
//
// Interface: one pixel (cnn_pkg fixed point) per input handshake, frames of
// 48x48 in raster order without markers. The result (two-bit code, class,
// confidence) comes out on a valid/ready handshake once per frame. All
// 5682 weights and biases are written through cfg_we/cfg_addr/cfg_data with
// the global address map of cnn_pkg; tau is the rejection threshold.
//
// Timing: the network takes one pixel per cycle; the first result leaves
// a few hundred cycles after the last pixel of its frame (see the
// accompanying documentation for measured counts).
//
// From the publication: the layer list, kernel size, reuse factors, input
// size, class count and softmax. Own choices: the sizes derived from the
// parameter count, the activation (ReLU) and pooling (max) functions, the
// number format defaults (the publication quantizes per layer, so each
// layer's formats are parameters here: input pixels, weights and output of
// each convolution and of the dense layer; ReLU and pooling keep their
// input format) and the run-time loadable parameters (the publication
// compiles trained weights into the circuit; trained values are not
// available here).
module student2_cnn
  import cnn_pkg::*;
#(
  parameter int IMG_SIDE = IMG,
  parameter int CH0      = C0,
  parameter int CH1      = C1,
  parameter int RF0      = RF_CONV0,
  parameter int RF1      = RF_CONV1,
  parameter int RFD      = RF_DENSE,
  // fraction bits per layer (cnn_pkg)
  parameter int PIX_FRAC = FRAC_PIX,
  parameter int W0_FRAC  = FRAC_W0,
  parameter int A0_FRAC  = FRAC_A0,
  parameter int W1_FRAC  = FRAC_W1,
  parameter int A1_FRAC  = FRAC_A1,
  parameter int WD_FRAC  = FRAC_WD,
  parameter int Z_FRAC   = FRAC_Z
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  output logic          in_ready,
  input  fx_t           in_pixel,
  input  logic          cfg_we,
  input  logic [15:0]   cfg_addr,
  input  fx_t           cfg_data,
  input  logic [15:0]   tau,
  output logic          out_valid,
  input  logic          out_ready,
  output logic [1:0]    out_code,
  output logic          out_class,
  output logic [16:0]   out_conf,
  output fx_t  [1:0]    out_logits
);
  localparam int S0  = IMG_SIDE - K + 1;
  localparam int Q0  = S0 / POOL;
  localparam int S1  = Q0 - K + 1;
  localparam int Q1  = S1 / POOL;
  localparam int NF  = Q1 * Q1 * CH1;
  localparam int NW0 = K * K * CH0 + CH0;
  localparam int NW1 = K * K * CH0 * CH1 + CH1;
  localparam int AD1 = NW0;
  localparam int AD2 = NW0 + NW1;
  localparam int NWD = NF * NCLS + NCLS;

  // configuration address decode
  logic we0, we1, we2;
  logic [15:0] la0, la1, la2;
  always_comb begin
    we0 = cfg_we && int'(cfg_addr) < AD1;
    we1 = cfg_we && int'(cfg_addr) >= AD1 && int'(cfg_addr) < AD2;
    we2 = cfg_we && int'(cfg_addr) >= AD2 && int'(cfg_addr) < AD2 + NWD;
    la0 = cfg_addr;
    la1 = cfg_addr - 16'(AD1);
    la2 = cfg_addr - 16'(AD2);
  end

  logic c0_v, c0_r, r0_v, r0_r, p0_v, p0_r;
  logic c1_v, c1_r, r1_v, r1_r, p1_v, p1_r;
  logic d_v, d_r;
  fx_t [CH0-1:0] c0_d, r0_d, p0_d;
  fx_t [CH1-1:0] c1_d, r1_d, p1_d;
  fx_t [NCLS-1:0] d_d;

  conv2d_stream #(.IN_H(IMG_SIDE), .IN_W(IMG_SIDE), .CIN(1), .COUT(CH0), .KS(K), .RF(RF0),
                  .IN_FRAC(PIX_FRAC), .W_FRAC(W0_FRAC), .O_FRAC(A0_FRAC)) u_conv0 (
    .clk, .rst_n, .in_valid(in_valid), .in_ready(in_ready), .in_data(in_pixel),
    .out_valid(c0_v), .out_ready(c0_r), .out_data(c0_d),
    .cfg_we(we0), .cfg_addr(la0), .cfg_data);

  relu_stream #(.C(CH0)) u_relu0 (
    .clk, .rst_n, .in_valid(c0_v), .in_ready(c0_r), .in_data(c0_d),
    .out_valid(r0_v), .out_ready(r0_r), .out_data(r0_d));

  maxpool2d_stream #(.IN_H(S0), .IN_W(S0), .C(CH0), .P(POOL)) u_pool0 (
    .clk, .rst_n, .in_valid(r0_v), .in_ready(r0_r), .in_data(r0_d),
    .out_valid(p0_v), .out_ready(p0_r), .out_data(p0_d));

  conv2d_stream #(.IN_H(Q0), .IN_W(Q0), .CIN(CH0), .COUT(CH1), .KS(K), .RF(RF1),
                  .IN_FRAC(A0_FRAC), .W_FRAC(W1_FRAC), .O_FRAC(A1_FRAC)) u_conv1 (
    .clk, .rst_n, .in_valid(p0_v), .in_ready(p0_r), .in_data(p0_d),
    .out_valid(c1_v), .out_ready(c1_r), .out_data(c1_d),
    .cfg_we(we1), .cfg_addr(la1), .cfg_data);

  relu_stream #(.C(CH1)) u_relu1 (
    .clk, .rst_n, .in_valid(c1_v), .in_ready(c1_r), .in_data(c1_d),
    .out_valid(r1_v), .out_ready(r1_r), .out_data(r1_d));

  maxpool2d_stream #(.IN_H(S1), .IN_W(S1), .C(CH1), .P(POOL)) u_pool1 (
    .clk, .rst_n, .in_valid(r1_v), .in_ready(r1_r), .in_data(r1_d),
    .out_valid(p1_v), .out_ready(p1_r), .out_data(p1_d));

  dense_rf #(.N_IN(NF), .N_OUT(NCLS), .IN_C(CH1), .RF(RFD),
             .IN_FRAC(A1_FRAC), .W_FRAC(WD_FRAC), .O_FRAC(Z_FRAC)) u_dense0 (
    .clk, .rst_n, .in_valid(p1_v), .in_ready(p1_r), .in_data(p1_d),
    .out_valid(d_v), .out_ready(d_r), .out_data(d_d),
    .cfg_we(we2), .cfg_addr(la2), .cfg_data);

  softmax_threshold #(.L_FRAC(Z_FRAC)) u_softmax (
    .clk, .rst_n, .in_valid(d_v), .in_ready(d_r), .in_logits(d_d), .tau,
    .out_valid, .out_ready, .out_code, .out_class, .out_conf);

  // logits of the last result, kept next to it
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)           out_logits <= '0;
    else if (d_v && d_r)  out_logits <= d_d;
  end
endmodule
