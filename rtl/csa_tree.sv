// csa_tree: N:2 carry-save compressor built as a Wallace tree of 3:2 rows.
//
// Reduces N vectors of W bits to two, sum and carry, with
// sum + carry == in[0] + ... + in[N-1] (mod 2^W). Each level groups its
// vectors in threes, compresses every group with a csa32 row (a row of full
// adders) and passes the one or two vectors left over straight on, so a level
// turns n vectors into 2*floor(n/3) + n%3. Levels are added until two vectors
// remain; the depth is therefore logarithmic in N. Purely combinational.
//
// The paper uses such compressors as 4:2 (feedforward), 5:2 (Karatsuba) and
// 10:2 (Karatsuba partial product multiplier) and builds them with a vendor
// tree generator; the Wallace grouping here is this design's own choice of
// the simplest tree that does the same job. For N = 1 the carry output is 0;
// for N = 2 the inputs pass through.
module csa_tree #(
  parameter int unsigned N = 4,
  parameter int unsigned W = 256
) (
  input  logic [N-1:0][W-1:0] in,
  output logic [W-1:0]        sum,
  output logic [W-1:0]        carry
);

  // number of vectors entering level l
  function automatic int unsigned count_at(int unsigned l);
    int unsigned n = N;
    for (int unsigned i = 0; i < l; i++) n = 2 * (n / 3) + n % 3;
    return n;
  endfunction

  // number of levels needed to get down to two vectors
  function automatic int unsigned num_levels();
    int unsigned n = N;
    int unsigned l = 0;
    while (n > 2) begin
      n = 2 * (n / 3) + n % 3;
      l++;
    end
    return l;
  endfunction

  localparam int unsigned NL = num_levels();

  // lv[l] holds the vectors entering level l; lv[NL] holds the final two
  logic [NL:0][N-1:0][W-1:0] lv;

  for (genvar i = 0; i < N; i++) begin : g_in
    assign lv[0][i] = in[i];
  end

  for (genvar l = 0; l < NL; l++) begin : g_lvl
    localparam int unsigned NI  = count_at(l);
    localparam int unsigned G   = NI / 3;
    localparam int unsigned REM = NI % 3;
    localparam int unsigned NO  = 2 * G + REM;

    for (genvar g = 0; g < G; g++) begin : g_row
      csa32 #(.W(W)) u_row (
        .x    (lv[l][3*g]),
        .y    (lv[l][3*g+1]),
        .z    (lv[l][3*g+2]),
        .sum  (lv[l+1][2*g]),
        .carry(lv[l+1][2*g+1])
      );
    end
    for (genvar r = 0; r < REM; r++) begin : g_pass
      assign lv[l+1][2*G+r] = lv[l][3*G+r];
    end
    for (genvar u = NO; u < N; u++) begin : g_unused
      assign lv[l+1][u] = '0;
    end
  end

  assign sum   = lv[NL][0];
  if (N >= 2) begin : g_carry
    assign carry = lv[NL][1];
  end else begin : g_one
    assign carry = '0;
  end

endmodule
