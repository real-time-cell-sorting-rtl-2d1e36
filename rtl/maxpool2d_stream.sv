// maxpool2d_stream: streaming PxP max pooling with stride P.
//
// Input vectors of C channels arrive in raster order over an IN_H x IN_W
// frame. A running horizontal maximum covers the P pixels of a window row;
// a buffer of IN_W/P partial maxima carries window rows down to the last
// one, where the finished window maximum is sent out. Rows and columns past
// the last whole window (IN_H and IN_W not multiples of P) are dropped, so
// the output frame is floor(IN_H/P) x floor(IN_W/P).
//
// Interface: valid/ready on both sides; one output register. in_ready is
// high when that register is empty or being emptied, so the stage takes one
// input per cycle. Latency is one cycle after the last pixel of a window.
//
// The publication names "poolings" between the layers; the 2x2 size is
// implied by its parameter count, max pooling is this design's choice.
module maxpool2d_stream
  import cnn_pkg::*;
#(
  parameter int IN_H = 46,
  parameter int IN_W = 46,
  parameter int C    = 16,
  parameter int P    = 2
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
  localparam int OUT_W = IN_W / P;
  localparam int OUT_H = IN_H / P;
  localparam int XW = $clog2(IN_W + 1);
  localparam int YW = $clog2(IN_H + 1);
  localparam int PW = $clog2(P + 1);
  localparam int OW = $clog2(OUT_W + 1);

  typedef fx_t [C-1:0] pix_t;

  pix_t rowmax [OUT_W];
  pix_t hmax;
  logic [XW-1:0] col;
  logic [YW-1:0] row;
  logic [PW-1:0] pc, pr;      // position in_win the window
  logic [OW-1:0] oc;          // output column

  logic accept, in_win;
  pix_t hnew, vnew;
  assign in_ready = !out_valid || out_ready;
  assign accept   = in_valid && in_ready;
  assign in_win   = (int'(col) < OUT_W * P) && (int'(row) < OUT_H * P);

  always_comb begin
    for (int i = 0; i < C; i++) begin
      hnew[i] = (pc == '0 || in_data[i] > hmax[i]) ? in_data[i] : hmax[i];
      vnew[i] = (pr == '0 || hnew[i] > rowmax[oc][i]) ? hnew[i] : rowmax[oc][i];
    end
  end

  always_ff @(posedge clk) begin
    if (accept && in_win) begin
      hmax <= hnew;
      if (int'(pc) == P - 1) rowmax[oc] <= vnew;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      col <= '0; row <= '0; pc <= '0; pr <= '0; oc <= '0;
      out_valid <= 1'b0;
      out_data  <= '0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (accept) begin
        if (in_win && int'(pc) == P - 1 && int'(pr) == P - 1) begin
          out_valid <= 1'b1;
          out_data  <= vnew;
        end
        if (int'(col) == IN_W - 1) begin
          col <= '0; pc <= '0; oc <= '0;
          if (int'(row) == IN_H - 1) begin
            row <= '0; pr <= '0;
          end else begin
            row <= row + 1'b1;
            pr  <= (int'(pr) == P - 1) ? '0 : pr + 1'b1;
          end
        end else begin
          col <= col + 1'b1;
          if (int'(pc) == P - 1) begin
            pc <= '0;
            oc <= oc + 1'b1;
          end else begin
            pc <= pc + 1'b1;
          end
        end
      end
    end
  end
endmodule
