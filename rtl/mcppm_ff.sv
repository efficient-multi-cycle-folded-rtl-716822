// mcppm_ff: multi-cycle partial product multiplier, feedforward style.
//
// Forms the unsigned product a * b (WA x WB bits) over CT * SUB_CT clock
// cycles and returns it as two registered vectors, sum and carry, whose sum
// is the product; the final carry-propagate addition is left to the user.
// This is the feedforward multiplier with its final adder omitted, and it is
// the core of mcim_ff.
//
// b is cut into CT slices of K = ceil(WB/CT) bits, least significant first.
// Each slice goes, together with a, to an inner PPM:
//   SUB_CT = 1: a combinational ppm_array, one slice per cycle;
//   SUB_CT > 1: another mcppm_ff with cycle time SUB_CT (and SUB_CT = 1), one
//               slice every SUB_CT cycles. Nesting multi-cycle PPMs this way
//               gives cycle times that are products of the two.
// The inner PPM's two vectors for slices 0 .. CT-2 are stored in registers.
// When the vectors of the last slice are available, all 2*CT vectors, each
// shifted left by (slice * K), go through a 2CT:2 compressor (4:2 at CT = 2)
// into the output registers. Nothing loops, so every stage can be pipelined.
// Every vector is non-negative and OUT_W >= WA + WB, so no bit is lost and
// sum + carry equals the product exactly.
//
// Interface: start with a and b present; hold a and b for CT * SUB_CT
// cycles. start may be raised again in any cycle from CT * SUB_CT after the
// previous start on. done is high, and sum / carry hold the product, in
// cycle LAT after start, LAT = CT for SUB_CT = 1 and CT * SUB_CT + 1
// otherwise (the inner PPM's registered outputs cost one cycle before the
// last compression). sum / carry keep their value until the next product is
// written. Bit 0 of carry is always zero, since the compressor's carry
// vector is shifted left by one; it is kept so that both vectors share one
// width.
//
// Follows the paper: a feedforward design without its final addition is a
// multi-cycle PPM, and multi-cycle PPMs can be nested inside feedforward
// designs. The nesting schedule, the capture of inner results when the inner
// PPM signals done, the reset (asynchronous, active low, control only) and
// the handshake are this design's own.
module mcppm_ff
  import mcim_pkg::*;
#(
  parameter int unsigned WA     = DEFAULT_W,
  parameter int unsigned WB     = DEFAULT_W,
  parameter int unsigned CT     = FF_CT_DEFAULT,
  parameter int unsigned SUB_CT = 1,
  parameter int unsigned OUT_W  = WA + WB
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic [WA-1:0]    a,
  input  logic [WB-1:0]    b,
  output logic [OUT_W-1:0] sum,
  output logic [OUT_W-1:0] carry,
  output logic             done
);

  localparam int unsigned K   = cdiv(WB, CT);      // slice width
  localparam int unsigned PW  = WA + K;            // inner product width
  localparam int unsigned CW  = $clog2(CT);
  localparam int unsigned SW  = (SUB_CT > 1) ? $clog2(SUB_CT) : 1;
  localparam int unsigned NV  = 2 * CT;            // compressor inputs

  initial begin
    assert (CT >= 2) else $error("mcppm_ff: CT must be at least 2");
    assert (OUT_W >= WA + WB) else $error("mcppm_ff: OUT_W must hold the product");
  end

  // ---------------- issue side: slice and sub-cycle counters -------------
  logic          busy;
  logic [CW-1:0] slice_q, slice;
  logic [SW-1:0] sub_q, sub;
  logic          active;
  logic          issue_last;                 // last cycle of the last slice

  assign slice      = start ? '0 : slice_q;
  assign sub        = start ? '0 : sub_q;
  assign active     = start | busy;
  assign issue_last = active && slice == CW'(CT - 1) && sub == SW'(SUB_CT - 1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy    <= 1'b0;
      slice_q <= '0;
      sub_q   <= '0;
    end else if (active) begin
      if (issue_last) begin
        busy    <= 1'b0;
        slice_q <= '0;
        sub_q   <= '0;
      end else begin
        busy <= 1'b1;
        if (sub == SW'(SUB_CT - 1)) begin
          sub_q   <= '0;
          slice_q <= slice + CW'(1);
        end else begin
          sub_q   <= sub + SW'(1);
          slice_q <= slice;
        end
      end
    end
  end

  logic [K*CT-1:0] b_pad;
  logic [K-1:0]    b_slice;

  always_comb begin
    b_pad   = (K*CT)'(b);
    b_slice = b_pad[int'(slice) * K +: K];
  end

  // ---------------- inner PPM ----------------
  logic [PW-1:0] pp_s, pp_c;
  logic          pp_valid;                   // pp_s/pp_c hold a slice product
  logic [CW-1:0] pp_idx;                     // ... of this slice

  if (SUB_CT == 1) begin : g_comb_ppm
    ppm_array #(.WA(WA), .WB(K), .OUT_W(PW)) u_ppm (
      .a    (a),
      .b    (b_slice),
      .sum  (pp_s),
      .carry(pp_c)
    );
    assign pp_valid = active;
    assign pp_idx   = slice;
  end else begin : g_mc_ppm
    logic          sub_done;
    logic [CW-1:0] cap_q;                    // slices completed so far

    mcppm_ff #(.WA(WA), .WB(K), .CT(SUB_CT), .SUB_CT(1), .OUT_W(PW)) u_ppm (
      .clk, .rst_n,
      .start(active && sub == '0),
      .a    (a),
      .b    (b_slice),
      .sum  (pp_s),
      .carry(pp_c),
      .done (sub_done)
    );

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n)        cap_q <= '0;
      else if (sub_done) cap_q <= (cap_q == CW'(CT - 1)) ? '0 : cap_q + CW'(1);
    end

    assign pp_valid = sub_done;
    assign pp_idx   = cap_q;
  end

  // ---------------- stored vectors, compressor, output registers ---------
  logic [CT-2:0][PW-1:0]   st_s, st_c;
  logic [NV-1:0][OUT_W-1:0] vec;
  logic [OUT_W-1:0]         cmp_s, cmp_c;
  logic                     fin;

  assign fin = pp_valid && pp_idx == CW'(CT - 1);

  always_ff @(posedge clk) begin
    for (int i = 0; i < CT - 1; i++) begin
      if (pp_valid && pp_idx == CW'(i)) begin
        st_s[i] <= pp_s;
        st_c[i] <= pp_c;
      end
    end
  end

  always_comb begin
    for (int i = 0; i < CT - 1; i++) begin
      vec[2*i]   = OUT_W'(st_s[i]) << (i * K);
      vec[2*i+1] = OUT_W'(st_c[i]) << (i * K);
    end
    vec[NV-2] = OUT_W'(pp_s) << ((CT - 1) * K);   // "left shift" of the
    vec[NV-1] = OUT_W'(pp_c) << ((CT - 1) * K);   // current vectors
  end

  csa_tree #(.N(NV), .W(OUT_W)) u_comp (
    .in   (vec),
    .sum  (cmp_s),
    .carry(cmp_c)
  );

  always_ff @(posedge clk) begin
    if (fin) begin
      sum   <= cmp_s;
      carry <= cmp_c;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) done <= 1'b0;
    else        done <= fin;
  end

  // ---------------- interface rules ----------------
  a_no_start_busy: assert property (@(posedge clk) disable iff (!rst_n)
    start |-> !busy)
    else $error("mcppm_ff: start while a product is in progress");
  a_hold_operands: assert property (@(posedge clk) disable iff (!rst_n)
    busy |-> ($stable(a) && $stable(b)))
    else $error("mcppm_ff: operands changed during a product");

endmodule
