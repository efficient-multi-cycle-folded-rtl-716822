// csa32: 3:2 carry-save compressor, a row of W full adders.
//
// Three W-bit vectors x, y, z are reduced to two, sum and carry, with
// sum + carry == x + y + z (mod 2^W). Bit i of sum is the full-adder sum of
// bit i of the inputs; the full-adder carry of bit i is placed at bit i+1 of
// carry, so the carry out of the top bit is dropped (arithmetic is modulo
// 2^W, which is what every user of this row relies on). Purely
// combinational, one full-adder delay.
//
// The row of full adders is the 3:2 compressor drawn in the paper's feedback
// architecture; the width default (256 = product width of a 128 x 128
// multiply) is this design's choice.
module csa32 #(
  parameter int unsigned W = 256
) (
  input  logic [W-1:0] x,
  input  logic [W-1:0] y,
  input  logic [W-1:0] z,
  output logic [W-1:0] sum,
  output logic [W-1:0] carry
);

  logic [W-2:0] maj;   // full-adder carries of bits 0 .. W-2

  always_comb begin
    sum   = x ^ y ^ z;
    maj   = (x[W-2:0] & y[W-2:0]) | (x[W-2:0] & z[W-2:0]) | (y[W-2:0] & z[W-2:0]);
    carry = {maj, 1'b0};
  end

endmodule
