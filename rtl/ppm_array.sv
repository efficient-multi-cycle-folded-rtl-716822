// ppm_array: partial product multiplier (PPM) of an unsigned WA-bit by an
// unsigned WB-bit operand.
//
// A PPM is a multiplier without its final carry-propagate addition: it
// returns two vectors, sum and carry, whose sum is the product. Here the WB
// partial products (a AND b[j]) << j are formed and reduced to two vectors by
// a csa_tree (Wallace tree of 3:2 rows). Both outputs are OUT_W bits and
// sum + carry == a * b (mod 2^OUT_W). When OUT_W >= WA + WB no bit is ever
// dropped, so sum + carry equals the product exactly as integers: every
// intermediate vector is non-negative and bounded by the product. Purely
// combinational.
//
// The paper uses a vendor PPM generator and names Wallace and Dadda
// multipliers as alternatives; the plain AND-array plus Wallace tree here is
// this design's choice of the simplest PPM.
module ppm_array #(
  parameter int unsigned WA    = 128,
  parameter int unsigned WB    = 64,
  parameter int unsigned OUT_W = WA + WB
) (
  input  logic [WA-1:0]    a,
  input  logic [WB-1:0]    b,
  output logic [OUT_W-1:0] sum,
  output logic [OUT_W-1:0] carry
);

  logic [WB-1:0][OUT_W-1:0] pp;

  always_comb begin
    for (int j = 0; j < WB; j++) begin
      pp[j] = b[j] ? (OUT_W'(a) << j) : '0;
    end
  end

  csa_tree #(.N(WB), .W(OUT_W)) u_tree (
    .in   (pp),
    .sum  (sum),
    .carry(carry)
  );

endmodule
