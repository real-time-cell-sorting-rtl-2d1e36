// relu_stream: registered element-wise ReLU between two network layers.
//
// Each accepted vector of C channels is passed on with every negative
// element replaced by zero. One register stage with a valid/ready
// handshake on both sides; in_ready is high whenever the output register is
// empty or being emptied, so the stage runs at one vector per cycle with one
// cycle of latency. The sign bit of every output is zero by construction,
// so synthesis sees those output bits as constants.
//
// The publication lists "activations" as a resource item of the network
// but does not name the function; ReLU is this design's choice, the usual
// activation of a small convolutional classifier.
module relu_stream
  import cnn_pkg::*;
#(
  parameter int C = 16
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  output logic          in_ready,
  input  fx_t [C-1:0]   in_data,
  output logic          out_valid,
  input  logic          out_ready,
  output fx_t [C-1:0]   out_data
);
  assign in_ready = !out_valid || out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_data  <= '0;
    end else if (in_ready) begin
      out_valid <= in_valid;
      if (in_valid)
        for (int i = 0; i < C; i++)
          out_data[i] <= in_data[i][DW-1] ? fx_t'(0) : in_data[i];
    end
  end
endmodule
