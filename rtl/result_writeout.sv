// result_writeout: serial writeout of the two-bit class code on a TTL line.
//
// When a result is accepted the line leaves its idle level for one start
// bit and then carries the two code bits, most significant first, each for
// BIT_CYCLES clock cycles; it then returns to idle. With the default 16
// cycles per bit at a 250 MHz clock the writeout lasts 48 cycles, 0.192 us.
// A new result is accepted only when the line is idle (in_ready).
//
// Interface: valid/ready input of a 2-bit code; ttl is the output line,
// busy is high during a writeout.
//
// From the publication: a serial writeout of the network's two-bit output
// lasting about 0.2 us after the end of inference, and, in the measured
// trace, a line that idles high. Own choices: the start bit, the bit order
// and the bit time.
module result_writeout #(
  parameter int  BIT_CYCLES = 16,
  parameter bit  IDLE_LEVEL = 1'b1
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       in_valid,
  output logic       in_ready,
  input  logic [1:0] in_code,
  output logic       ttl,
  output logic       busy
);
  localparam int BW = $clog2(BIT_CYCLES + 1);

  logic [1:0]    shreg;     // code bits still to send, next in bit 1
  logic [1:0]    nbits;     // bits still to send after the current one
  logic [BW-1:0] tcnt;

  assign in_ready = !busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy  <= 1'b0;
      ttl   <= IDLE_LEVEL;
      shreg <= '0;
      nbits <= '0;
      tcnt  <= '0;
    end else if (!busy) begin
      if (in_valid) begin
        busy  <= 1'b1;
        ttl   <= ~IDLE_LEVEL;                  // start bit
        shreg <= in_code;
        nbits <= 2'd2;
        tcnt  <= '0;
      end
    end else if (int'(tcnt) == BIT_CYCLES - 1) begin
      tcnt <= '0;
      if (nbits == 2'd0) begin
        busy <= 1'b0;
        ttl  <= IDLE_LEVEL;
      end else begin
        nbits <= nbits - 1'b1;
        ttl   <= shreg[1];
        shreg <= {shreg[0], 1'b0};
      end
    end else begin
      tcnt <= tcnt + 1'b1;
    end
  end
endmodule
