// dense_rf: flatten followed by a fully connected layer with a reuse factor.
//
// The layer collects one frame of N_IN features, arriving IN_C per
// handshake in channel-last raster order (the flatten order), into a
// feature buffer. It then runs RF multiply-accumulate cycles; in cycle r
// each of the N_OUT outputs adds the products of features
// r*N_IN/RF .. (r+1)*N_IN/RF-1 with their weights, so the layer has
// N_IN*N_OUT/RF multipliers (128 for 1600 inputs, 2 outputs, RF 25). The
// N_OUT results (logits) are then offered on the output handshake.
//
// Interface: valid/ready input of IN_C features, valid/ready output of
// N_OUT logits. While computing or holding a result the input is not
// ready. Parameters: cfg_we/cfg_addr/cfg_data, local address i*N_OUT+o for
// weight (input i, output o), N_IN*N_OUT+o for bias o.
//
// Timing: the result is valid RF cycles after the clock edge that accepts
// the last feature of the frame (25 cycles at the defaults).
//
// From the publication: the reuse factor 25 of the dense layer, two output
// neurons (binary design), 1600 inputs implied by the parameter count.
// Own choices: the feature buffer, the split of the work by input index,
// the number format and its defaults (cnn_pkg; the per-layer formats
// follow the publication's layer-level quantization).
module dense_rf
  import cnn_pkg::*;
#(
  parameter int N_IN  = 1600,
  parameter int N_OUT = 2,
  parameter int IN_C  = 16,
  parameter int RF    = 25,
  parameter int IN_FRAC = FRAC,      // fraction bits of the features
  parameter int W_FRAC  = FRAC,      // of the weights and biases
  parameter int O_FRAC  = FRAC       // of the logits
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               in_valid,
  output logic               in_ready,
  input  fx_t [IN_C-1:0]     in_data,
  output logic               out_valid,
  input  logic               out_ready,
  output fx_t [N_OUT-1:0]    out_data,
  input  logic               cfg_we,
  input  logic [15:0]        cfg_addr,
  input  fx_t                cfg_data
);
  localparam int NW  = N_IN * N_OUT;
  localparam int IPC = N_IN / RF;               // inputs per cycle
  localparam int IW  = $clog2(N_IN + 1);
  localparam int RW  = $clog2(RF + 1);
  localparam int SH  = IN_FRAC + W_FRAC - O_FRAC;  // bits dropped by requant

  initial begin
    assert (N_IN % RF == 0)   else $fatal(1, "N_IN must be a multiple of RF");
    assert (N_IN % IN_C == 0) else $fatal(1, "N_IN must be a multiple of IN_C");
    assert (SH >= 0)          else $fatal(1, "output format finer than input times weight");
  end

  typedef enum logic [1:0] {S_LOAD, S_MAC, S_OUT} state_e;
  state_e state;

  fx_t  w    [NW];
  fx_t  bias [N_OUT];
  fx_t  feat [N_IN];
  acc_t acc  [N_OUT];
  logic [IW-1:0] idx;
  logic [RW-1:0] rc;

  assign in_ready  = (state == S_LOAD);
  assign out_valid = (state == S_OUT);

  always_ff @(posedge clk) begin
    if (cfg_we) begin
      if (int'(cfg_addr) < NW) w[int'(cfg_addr)] <= cfg_data;
      else if (int'(cfg_addr) < NW + N_OUT) bias[int'(cfg_addr) - NW] <= cfg_data;
    end
    if (in_valid && in_ready)
      for (int i = 0; i < IN_C; i++) feat[int'(idx) + i] <= in_data[i];
  end

  // one reuse cycle: IPC inputs times N_OUT outputs
  acc_t part [N_OUT];
  always_comb begin
    for (int o = 0; o < N_OUT; o++) begin
      part[o] = '0;
      for (int i = 0; i < IPC; i++)
        part[o] += acc_t'(feat[int'(rc) * IPC + i]) *
                   acc_t'(w[(int'(rc) * IPC + i) * N_OUT + o]);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_LOAD;
      idx      <= '0;
      rc       <= '0;
      out_data <= '0;
      for (int o = 0; o < N_OUT; o++) acc[o] <= '0;
    end else begin
      unique case (state)
        S_LOAD: if (in_valid) begin
          if (int'(idx) == N_IN - IN_C) begin
            idx   <= '0;
            rc    <= '0;
            state <= S_MAC;
            for (int o = 0; o < N_OUT; o++) acc[o] <= acc_t'(bias[o]) <<< IN_FRAC;
          end else begin
            idx <= idx + IW'(IN_C);
          end
        end
        S_MAC: begin
          for (int o = 0; o < N_OUT; o++) acc[o] <= acc[o] + part[o];
          if (int'(rc) == RF - 1) begin
            state <= S_OUT;
            for (int o = 0; o < N_OUT; o++) out_data[o] <= requant(acc[o] + part[o], SH);
          end
          rc <= rc + 1'b1;
        end
        S_OUT: if (out_ready) state <= S_LOAD;
        default: state <= S_LOAD;
      endcase
    end
  end
endmodule
