// cnn_pkg: shared types and constants of the Student 2 cell classifier.
//
// The network is a 48x48 single-channel image classifier with two 3x3
// "valid" convolutions (1->16 and 16->16 channels), each followed by an
// activation and 2x2 pooling, then one fully connected layer of 1600 inputs
// and 2 outputs. These sizes are not listed one by one in the source
// publication; they are the only small layout that gives its 5682
// parameters and, with its reuse factors 1, 2 and 25, its per-layer DSP
// shares (144, 1152 and 128 multipliers of a 1700-DSP device: 8.5 %,
// 67.8 %, 7.5 %). The reuse factors, the 48x48 input, the parameter count
// and the two classes follow the publication.
//
// Number format: the publication quantizes the network "with layer-level
// granularity" but does not give the formats. Every value is a signed
// 16-bit fixed-point word; the number of fraction bits is set per layer:
// for the network input, for each layer's weights and biases, and for
// each layer's output (FRAC_* below). All default to 10 fraction bits
// (6 integer bits, the default format of the HLS flow the design was
// generated with); the defaults are this design's choice. A layer with
// input format I, weight format W and output format O sums its products
// exactly with I+W fraction bits, the bias aligned by a shift of I, and
// brings the sum back to 16 bits by dropping the low I+W-O bits (round
// toward minus infinity) and saturating.
//
// Parameter address map: every weight and bias has one address, 0..5681,
// written through the configuration port of the top. Kernel order is
// (ky, kx, cin, cout) with cout fastest, dense order is (in, out) with out
// fastest, the channel-last order used by common training frameworks.
package cnn_pkg;

  parameter int DW   = 16;               // data / weight width
  parameter int FRAC = 10;               // default fraction bits
  parameter int ACCW = 48;               // accumulator width
  parameter int AW   = 13;               // parameter address width

  typedef logic signed [DW-1:0]   fx_t;
  typedef logic signed [ACCW-1:0] acc_t;

  // Student 2 geometry
  parameter int IMG     = 48;            // input image side
  parameter int K       = 3;             // kernel side
  parameter int C0      = 16;            // conv_0 output channels
  parameter int C1      = 16;            // conv_1 output channels
  parameter int NCLS    = 2;             // classes (B cell, T4 cell)
  parameter int POOL    = 2;             // pooling window and stride
  parameter int H0      = IMG - K + 1;   // 46, conv_0 output side
  parameter int P0      = H0 / POOL;     // 23, pool_0 output side
  parameter int H1      = P0 - K + 1;    // 21, conv_1 output side
  parameter int P1      = H1 / POOL;     // 10, pool_1 output side
  parameter int NFLAT   = P1 * P1 * C1;  // 1600, dense_0 inputs

  // fraction bits per layer (see the number format above)
  parameter int FRAC_PIX = FRAC;         // network input (camera pixels)
  parameter int FRAC_W0  = FRAC;         // conv_0 weights and biases
  parameter int FRAC_A0  = FRAC;         // conv_0 output (and pool_0)
  parameter int FRAC_W1  = FRAC;         // conv_1 weights and biases
  parameter int FRAC_A1  = FRAC;         // conv_1 output (and pool_1)
  parameter int FRAC_WD  = FRAC;         // dense_0 weights and biases
  parameter int FRAC_Z   = FRAC;         // dense_0 output, the logits

  // reuse factors (operations sharing one multiplier)
  parameter int RF_CONV0 = 1;
  parameter int RF_CONV1 = 2;
  parameter int RF_DENSE = 25;

  // parameter address map
  parameter int N_C0W = K * K * 1 * C0;      // 144
  parameter int N_C1W = K * K * C0 * C1;     // 2304
  parameter int N_DW  = NFLAT * NCLS;        // 3200
  parameter int A_C0  = 0;                   // conv_0 weights then biases
  parameter int A_C1  = A_C0 + N_C0W + C0;   // 160
  parameter int A_D   = A_C1 + N_C1W + C1;   // 2480
  parameter int N_PARAMS = A_D + N_DW + NCLS;  // 5682

  // two-bit class code of the writeout
  typedef enum logic [1:0] {
    CODE_REJECT = 2'b00,   // confidence below threshold: discard channel
    CODE_B      = 2'b01,   // class 0, B cell
    CODE_T4     = 2'b10    // class 1, T4 cell
  } class_code_e;

  // Bring a sum back to fx_t: drop sh fraction bits (floor), saturate.
  function automatic fx_t requant(input acc_t a, input int sh);
    acc_t s;
    s = a >>> sh;
    if (s > acc_t'(32767))       return fx_t'(16'sh7fff);
    else if (s < -acc_t'(32768)) return fx_t'(16'sh8000);
    else                         return fx_t'(s[DW-1:0]);
  endfunction

endpackage
