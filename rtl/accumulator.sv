// accumulator -- shift-accumulate stage that assembles the filter output.
//
// Adds the shifted partial products of the L bit planes of one output:
//   acc = sh_0                      on the first plane (restarts the sum)
//   acc = acc + sh_i                on planes 1 .. L-2
//   y   = acc - sh_{L-1}            on the last plane, the sign bits
// The subtraction of the sign plane makes the inputs two's complement
// (sign bit weighted -2^(L-1)). The single adder is a carry look-ahead adder;
// it subtracts by inverting its operand with carry in 1.
//
// Interface: sh and tag arrive together each cycle; planes with
// tag.valid = 0 are ignored. y is registered on the clock edge that takes the
// last plane and y_valid pulses high for the one cycle after it; y holds its
// value until the next output. Arithmetic is modulo 2^OUT_W: with 16-bit
// samples and coefficients the only exact result that does not fit 34 bits is
// +2^33 (all taps and coefficients -32768). Reset (synchronous, active low)
// clears y, y_valid and the accumulator.
//
// The plane-by-plane shift-and-add with the sign plane subtracted follows the
// filter's description; the output register, valid pulse and reset are this
// design's own.
module accumulator
  import fir_da_pkg::*;
#(
  parameter int unsigned OW = fir_da_pkg::OUT_W
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [OW-1:0] sh,
  input  bit_tag_t      tag,
  output logic [OW-1:0] y,
  output logic          y_valid
);

  logic [OW-1:0] acc_q, base, operand, sum;

  assign base    = tag.first ? '0 : acc_q;
  assign operand = tag.last ? ~sh : sh;

  cla_adder #(.W(OW)) u_acc_add (
    .a(base), .b(operand), .cin(tag.last), .sum(sum), .cout()
  );

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      acc_q   <= '0;
      y       <= '0;
      y_valid <= 1'b0;
    end else begin
      y_valid <= tag.valid && tag.last;
      if (tag.valid) begin
        acc_q <= sum;
        if (tag.last) y <= sum;
      end
    end
  end

endmodule
