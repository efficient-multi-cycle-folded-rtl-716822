// ppm_kara: recursive Karatsuba partial product multiplier of two unsigned
// N-bit operands.
//
// One level of Karatsuba splits each operand at m = ceil(n/2),
// a = {a1, a0}, b = {b1, b0}, and forms three smaller products
//   T0 = a0 * b0,  T1 = a1 * b1,  T2 = (a0 + a1) * (b0 + b1),
// each by a smaller PPM that returns two vectors. A 10:2 compressor
// (csa_tree) sums the ten vectors of
//   a * b = T1 * 2^(2m) + (T2 - T1 - T0) * 2^m + T0.
// The two subtractions are done inside the compressor, without an adder:
// -(x * 2^m) == {~x, m zeros} + 2^m (mod 2^OUT_W), so each of the four
// vectors of T0 and T1 that is subtracted enters inverted and shifted, and
// the four +2^m corrections are folded into the single constant bit 2^(m+2).
// That bit is ORed into the vector T1.sum << 2m, whose low 2m bits are zero
// (m + 2 < 2m holds for every split made, since only n >= 8 is split).
//
// The recursion is unrolled into levels. Level l holds 3^l nodes that all
// have the same operand width n(l): n(0) = N and n(l+1) = ceil(n(l)/2) + 1,
// the width of the operand sums (a0 and a1 are zero-extended to it). Level
// LV = min(LEVELS, levels while n >= 8) holds the leaves, plain ppm_array
// multipliers; every node above combines its three children with a 10:2
// compressor. Node j of level l is stored at index (3^l - 1)/2 + j, and its
// children are nodes 3j, 3j+1, 3j+2 of level l+1 (T0, T1, T2).
//
// Outputs: sum + carry == a * b (mod 2^OUT_W); OUT_W >= 2N makes that the
// exact product. All vectors are carried at OUT_W bits, because the inverted
// vectors are only correct modulo the full frame. Purely combinational.
//
// Follows the paper: three smaller PPMs feeding a 10:2 compressor, any depth
// of recursion, subtraction by inverted inputs and constants. This design's
// own choices: the split point, equal widths for the three children, the
// leaf size limit, and where the constant goes.
module ppm_kara #(
  parameter int unsigned N      = 65,
  parameter int unsigned OUT_W  = 2 * N,
  parameter int unsigned LEVELS = 1
) (
  input  logic [N-1:0]     a,
  input  logic [N-1:0]     b,
  output logic [OUT_W-1:0] sum,
  output logic [OUT_W-1:0] carry
);

  // operand width of the nodes of level l
  function automatic int unsigned wid(int unsigned l);
    int unsigned n = N;
    for (int unsigned i = 0; i < l; i++) n = (n + 1) / 2 + 1;
    return n;
  endfunction

  // levels actually split: at most LEVELS, and only while n >= 8
  function automatic int unsigned eff_levels();
    int unsigned n = N;
    int unsigned l = 0;
    while (l < LEVELS && n >= 8) begin
      n = (n + 1) / 2 + 1;
      l++;
    end
    return l;
  endfunction

  function automatic int unsigned pow3(int unsigned l);
    int unsigned p = 1;
    for (int unsigned i = 0; i < l; i++) p *= 3;
    return p;
  endfunction

  // index of node 0 of level l
  function automatic int unsigned base(int unsigned l);
    return (pow3(l) - 1) / 2;
  endfunction

  localparam int unsigned LV  = eff_levels();
  localparam int unsigned TOT = base(LV + 1);      // nodes in all levels

  initial begin
    assert (OUT_W >= 2 * N)
      else $error("ppm_kara: OUT_W (%0d) must hold the product (%0d bits)", OUT_W, 2 * N);
  end

  logic [TOT-1:0][N-1:0]     op_a, op_b;   // node operands (low n(l) bits used)
  logic [TOT-1:0][OUT_W-1:0] vs, vc;       // node results, carry-save

  assign op_a[0] = a;
  assign op_b[0] = b;

  for (genvar l = 0; l < LV; l++) begin : g_lvl
    localparam int unsigned NL = wid(l);
    localparam int unsigned M  = (NL + 1) / 2;

    for (genvar j = 0; j < pow3(l); j++) begin : g_node
      localparam int unsigned ID = base(l) + j;
      localparam int unsigned C0 = base(l + 1) + 3 * j;   // first child

      logic [M:0] a0, a1, b0, b1, as, bs;
      logic [9:0][OUT_W-1:0] vec;

      always_comb begin
        a0 = (M+1)'(op_a[ID][M-1:0]);
        b0 = (M+1)'(op_b[ID][M-1:0]);
        a1 = (M+1)'(op_a[ID][NL-1:M]);
        b1 = (M+1)'(op_b[ID][NL-1:M]);
        as = a0 + a1;
        bs = b0 + b1;
      end

      assign op_a[C0]     = N'(a0);
      assign op_b[C0]     = N'(b0);
      assign op_a[C0 + 1] = N'(a1);
      assign op_b[C0 + 1] = N'(b1);
      assign op_a[C0 + 2] = N'(as);
      assign op_b[C0 + 2] = N'(bs);

      always_comb begin
        // + T0
        vec[0] = vs[C0];
        vec[1] = vc[C0];
        // - T0 * 2^m  (inverted; correction in the constant)
        vec[2] = ~vs[C0] << M;
        vec[3] = ~vc[C0] << M;
        // + T1 * 2^(2m), with the constant 4 * 2^m in its empty low bits
        vec[4] = (vs[C0 + 1] << (2 * M)) | (OUT_W'(1) << (M + 2));
        vec[5] = vc[C0 + 1] << (2 * M);
        // - T1 * 2^m
        vec[6] = ~vs[C0 + 1] << M;
        vec[7] = ~vc[C0 + 1] << M;
        // + T2 * 2^m
        vec[8] = vs[C0 + 2] << M;
        vec[9] = vc[C0 + 2] << M;
      end

      csa_tree #(.N(10), .W(OUT_W)) u_c102 (
        .in   (vec),
        .sum  (vs[ID]),
        .carry(vc[ID])
      );
    end
  end

  // leaves
  for (genvar j = 0; j < pow3(LV); j++) begin : g_leaf
    localparam int unsigned ID = base(LV) + j;
    localparam int unsigned NL = wid(LV);

    ppm_array #(.WA(NL), .WB(NL), .OUT_W(OUT_W)) u_ppm (
      .a    (op_a[ID][NL-1:0]),
      .b    (op_b[ID][NL-1:0]),
      .sum  (vs[ID]),
      .carry(vc[ID])
    );
  end

  assign sum   = vs[0];
  assign carry = vc[0];

endmodule
