// cellsort_top: in-situ cell classifier for a frame grabber readout path.
//
// Camera pixels of the region of interest flow from the frame grabber's
// camera link into the pixel bridge, which frames and scales them, through
// the Student 2 network, and out as a two-bit sort code. The code is
// written out serially on a TTL line (ttl_writeout) for the sorter; a
// second TTL line (ttl_inference) is high while a frame is inside the
// network, so an oscilloscope shows the inference latency. The network
// processes frames as a stream, so the input of one frame overlaps the
// inference of the previous one.
//
// Ports: pix_* is the pixel stream (valid/ready, 8 bits, start-of-frame
// flag) from the camera-link side of the frame grabber; cfg_* writes the
// 5682 network parameters (address map in cnn_pkg) and tau sets the
// rejection threshold (16 fraction bits; 0.5 or less rejects nothing).
// res_* pulses once per classified frame with the code, class, confidence
// and logits. last_latency is the last TTL high time in cycles, frames_done
// counts results, frame_err pulses when a short frame was padded,
// writeout_busy is high during a serial writeout.
//
// Timing: one pixel per clock. A result is handed to the writeout as soon
// as the writeout line is idle; while it is busy the network output waits.
//
// From the publication: the placement of the network in the readout path,
// the network, the TTL latency square wave and the two-bit serial
// writeout. The camera protocol IP, triggering and the host DMA of the
// frame grabber are outside this design; their signals are ports.
module cellsort_top
  import cnn_pkg::*;
#(
  parameter int BIT_CYCLES = 16,
  // fraction bits per layer of the network (cnn_pkg)
  parameter int PIX_FRAC   = FRAC_PIX,
  parameter int W0_FRAC    = FRAC_W0,
  parameter int A0_FRAC    = FRAC_A0,
  parameter int W1_FRAC    = FRAC_W1,
  parameter int A1_FRAC    = FRAC_A1,
  parameter int WD_FRAC    = FRAC_WD,
  parameter int Z_FRAC     = FRAC_Z
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          pix_valid,
  output logic          pix_ready,
  input  logic [7:0]    pix_data,
  input  logic          pix_sof,
  input  logic          cfg_we,
  input  logic [15:0]   cfg_addr,
  input  logic [15:0]   cfg_data,
  input  logic [15:0]   tau,
  output logic          res_valid,
  output logic [1:0]    res_code,
  output logic          res_class,
  output logic [16:0]   res_conf,
  output fx_t  [1:0]    res_logits,
  output logic          ttl_inference,
  output logic          ttl_writeout,
  output logic [31:0]   last_latency,
  output logic [31:0]   frames_done,
  output logic          frame_err,
  output logic          writeout_busy
);
  logic nn_valid, nn_ready, frame_start;
  fx_t  nn_pixel;
  logic o_valid, o_ready;

  pixel_bridge #(.NPIX(IMG * IMG), .PW(8), .O_FRAC(PIX_FRAC)) u_bridge (
    .clk, .rst_n, .pix_valid, .pix_ready, .pix_data, .pix_sof,
    .nn_valid, .nn_ready, .nn_pixel, .frame_start, .frame_err);

  student2_cnn #(.PIX_FRAC(PIX_FRAC), .W0_FRAC(W0_FRAC), .A0_FRAC(A0_FRAC),
                 .W1_FRAC(W1_FRAC), .A1_FRAC(A1_FRAC), .WD_FRAC(WD_FRAC),
                 .Z_FRAC(Z_FRAC)) u_cnn (
    .clk, .rst_n, .in_valid(nn_valid), .in_ready(nn_ready), .in_pixel(nn_pixel),
    .cfg_we, .cfg_addr, .cfg_data(fx_t'(cfg_data)), .tau,
    .out_valid(o_valid), .out_ready(o_ready), .out_code(res_code),
    .out_class(res_class), .out_conf(res_conf), .out_logits(res_logits));

  assign res_valid = o_valid && o_ready;

  inference_monitor #(.DEPTH_W(4), .CNT_W(32)) u_mon (
    .clk, .rst_n, .start(frame_start), .done(res_valid), .ttl(ttl_inference),
    .last_latency, .frames(frames_done));

  result_writeout #(.BIT_CYCLES(BIT_CYCLES), .IDLE_LEVEL(1'b1)) u_wo (
    .clk, .rst_n, .in_valid(o_valid), .in_ready(o_ready), .in_code(res_code),
    .ttl(ttl_writeout), .busy(writeout_busy));

endmodule
