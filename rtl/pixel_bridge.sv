// pixel_bridge: hands camera pixels from the frame grabber to the network.
//
// The frame grabber delivers 8-bit monochrome pixels of a region of
// interest with a start-of-frame flag on the first pixel. The bridge
// scales each pixel to the network's fixed-point input (pixel/256, a value
// in [0,1)) and guarantees the network sees whole frames of NPIX pixels:
//   - before a start of frame it drops pixels (WAIT);
//   - it then forwards exactly NPIX pixels (PASS), dropping any surplus
//     until the next start of frame;
//   - if a new start of frame comes before NPIX pixels were passed, the
//     short frame is completed with zero pixels (PAD) and frame_err pulses;
//     the new frame then starts normally.
// frame_start pulses when the first pixel of a frame enters the network:
// it starts the inference timing on the TTL monitor.
//
// The scaled pixel only uses bits O_FRAC-8 .. O_FRAC-1 of the 16-bit
// network word (bits 2..9 at the default of 10 fraction bits); the other
// bits are constant zero. O_FRAC must lie between PW and 15.
//
// Interface: valid/ready on both sides, combinational pass-through (no
// added latency). Timing: one pixel per cycle.
//
// The publication names the bridging framework between the frame grabber
// and the network IP but not its insides; everything here (scaling,
// framing, padding) is this design's own choice.
module pixel_bridge
  import cnn_pkg::*;
#(
  parameter int NPIX = IMG * IMG,
  parameter int PW   = 8,
  parameter int O_FRAC = FRAC_PIX    // fraction bits of the network input
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          pix_valid,
  output logic          pix_ready,
  input  logic [PW-1:0] pix_data,
  input  logic          pix_sof,
  output logic          nn_valid,
  input  logic          nn_ready,
  output fx_t           nn_pixel,
  output logic          frame_start,
  output logic          frame_err
);
  localparam int CW = $clog2(NPIX + 1);

  initial begin
    assert (O_FRAC >= PW && O_FRAC < DW) else $fatal(1, "pixel does not fit the input format");
  end

  typedef enum logic [1:0] {S_WAIT, S_PASS, S_PAD} state_e;
  state_e state;
  logic [CW-1:0] cnt;
  logic nn_fire;

  always_comb begin
    nn_valid  = 1'b0;
    pix_ready = 1'b0;
    nn_pixel  = fx_t'(acc_t'(pix_data) <<< (O_FRAC - PW));
    unique case (state)
      S_WAIT: begin
        nn_valid  = pix_valid && pix_sof;
        pix_ready = pix_sof ? nn_ready : 1'b1;
      end
      S_PASS: begin
        nn_valid  = pix_valid && !pix_sof;
        pix_ready = pix_sof ? 1'b0 : nn_ready;
      end
      S_PAD: begin
        nn_valid = 1'b1;
        nn_pixel = '0;
      end
      default: ;
    endcase
  end

  assign nn_fire     = nn_valid && nn_ready;
  assign frame_start = nn_fire && (state == S_WAIT);
  assign frame_err   = (state == S_PASS) && pix_valid && pix_sof;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_WAIT;
      cnt   <= '0;
    end else begin
      if (frame_err) state <= S_PAD;
      if (nn_fire) begin
        if (int'(cnt) == NPIX - 1) begin
          cnt   <= '0;
          state <= S_WAIT;
        end else begin
          cnt <= cnt + 1'b1;
          if (state == S_WAIT) state <= S_PASS;
        end
      end
    end
  end
endmodule
