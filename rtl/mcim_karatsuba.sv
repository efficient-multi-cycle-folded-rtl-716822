// mcim_karatsuba: three-cycle Karatsuba multi-cycle folded integer
// multiplier.
//
// Computes the unsigned 2W-bit product a * b (W even, H = W/2) in three
// clock cycles with one (H+1) x (H+1) partial product multiplier (PPM), using
//   a * b = T1 * 2^W + (T2 - T1 - T0) * 2^H + T0,
//   T0 = a0*b0, T1 = a1*b1, T2 = (a0+a1)*(b0+b1),  a = {a1,a0}, b = {b1,b0}.
// Schedule (step = cycle after start):
//   step 0: PPM <- a0, b0 (T0);       shared adder: a0 + a1 -> register sa
//   step 1: PPM <- a1, b1 (T1);       shared adder: b0 + b1 -> register sb
//   step 2: PPM <- sa, sb (T2)
// The two PPM vectors also pass through inverters. A multiplexer stage picks
// five vectors per step for a 5:2 compressor whose two outputs are registered
// and fed back (the loop holds only the compressor, not the adder):
//   step 0: T0.s, T0.c, -T0.s*2^H, -T0.c*2^H, constant     (no feedback)
//   step 1: fb.s, fb.c, T1.s*2^W, T1.c*2^W, -T1.s*2^H;  -T1.c*2^H is delayed
//   step 2: fb.s, fb.c, T2.s*2^H, T2.c*2^H, delayed -T1.c*2^H
// A subtracted vector enters as {~x, H zeros}; each such vector needs +2^H,
// and the four corrections are the constant 2^(H+2) injected at start. After
// step 2 the feedback registers hold the product in carry-save form and the
// final adder, outside the loop, resolves it. All vectors are 2W bits and
// exact modulo 2^(2W). The PPM is ppm_kara with KARA_LEVELS levels of
// Karatsuba recursion (0 = plain PPM).
//
// Interface: a and b must be held stable from the start cycle through the two
// cycles that follow. start may be raised when the unit is idle, including
// the cycle in which done is high.
// Timing: start in cycle 0; done is high in cycle 3 (latency 3) and result
// then holds the product; it stays until the cycle after the next start.
// OUT_REGS extra output registers add OUT_REGS cycles.
//
// Follows the paper: CT = 3, the shared adder behind two small multiplexers,
// operand multiplexers in front of the PPM, inverters on the PPM outputs, a
// multiplexer stage, a 5:2 compressor fed by start and looped on itself, a
// final adder outside the loop, optional recursive Karatsuba PPM. This
// design's own choices: the order of T0/T1/T2, which vector is delayed, where
// the constant goes, the reset and handshake, and KARA_LEVELS = 1.
module mcim_karatsuba
  import mcim_pkg::*;
#(
  parameter int unsigned W           = DEFAULT_W,
  parameter int unsigned KARA_LEVELS = 1,
  parameter int unsigned OUT_REGS    = 0
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           start,
  input  logic [W-1:0]   a,
  input  logic [W-1:0]   b,
  output logic [2*W-1:0] result,
  output logic           done
);

  localparam int unsigned H  = W / 2;
  localparam int unsigned RW = 2 * W;

  initial begin
    assert (W % 2 == 0 && W >= 4) else $error("mcim_karatsuba: W must be even and >= 4");
  end

  typedef enum logic [1:0] {S_T0 = 2'd0, S_T1 = 2'd1, S_T2 = 2'd2} step_e;

  // ---------------- control ----------------
  step_e step, nxt_q;
  logic  busy, active, last, done_raw;

  assign step   = start ? S_T0 : nxt_q;
  assign active = start | busy;
  assign last   = busy && (nxt_q == S_T2);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy     <= 1'b0;
      nxt_q    <= S_T0;
      done_raw <= 1'b0;
    end else begin
      done_raw <= last;
      if (start) begin
        busy  <= 1'b1;
        nxt_q <= S_T1;
      end else if (busy) begin
        if (nxt_q == S_T2) begin
          busy  <= 1'b0;
          nxt_q <= S_T0;
        end else begin
          nxt_q <= S_T2;
        end
      end
    end
  end

  // ---------------- operand sums (one shared adder) ----------------
  logic [H-1:0] a0, a1, b0, b1, add_x, add_y;
  logic [H:0]   add_o, sa_q, sb_q;

  assign a0 = a[H-1:0];
  assign a1 = a[W-1:H];
  assign b0 = b[H-1:0];
  assign b1 = b[W-1:H];

  always_comb begin
    add_x = (step == S_T0) ? a0 : b0;
    add_y = (step == S_T0) ? a1 : b1;
    add_o = {1'b0, add_x} + {1'b0, add_y};
  end

  always_ff @(posedge clk) begin
    if (active && step == S_T0) sa_q <= add_o;
    if (active && step == S_T1) sb_q <= add_o;
  end

  // ---------------- PPM operand multiplexers and PPM ----------------
  logic [H:0]    pa, pb;
  logic [RW-1:0] p_s, p_c;

  always_comb begin
    unique case (step)
      S_T0:    begin pa = {1'b0, a0}; pb = {1'b0, b0}; end
      S_T1:    begin pa = {1'b0, a1}; pb = {1'b0, b1}; end
      default: begin pa = sa_q;       pb = sb_q;       end
    endcase
  end

  ppm_kara #(.N(H + 1), .OUT_W(RW), .LEVELS(KARA_LEVELS)) u_ppm (
    .a    (pa),
    .b    (pb),
    .sum  (p_s),
    .carry(p_c)
  );

  // ---------------- inverters, multiplexer stage, 5:2 compressor ----------
  logic [RW-1:0]      n_s, n_c;        // -x * 2^H less its +2^H correction
  logic [RW-1:0]      fb_s, fb_c, dly_q, cmp_s, cmp_c;
  logic [4:0][RW-1:0] vec;

  localparam logic [RW-1:0] CORR = RW'(1) << (H + 2);   // 4 * 2^H

  assign n_s = ~p_s << H;
  assign n_c = ~p_c << H;

  always_comb begin
    unique case (step)
      S_T0:    vec = {CORR, n_c, n_s, p_c, p_s};
      S_T1:    vec = {n_s, p_c << W, p_s << W, fb_c, fb_s};
      default: vec = {dly_q, p_c << H, p_s << H, fb_c, fb_s};
    endcase
  end

  csa_tree #(.N(5), .W(RW)) u_c52 (
    .in   (vec),
    .sum  (cmp_s),
    .carry(cmp_c)
  );

  always_ff @(posedge clk) begin
    if (active) begin
      fb_s <= cmp_s;
      fb_c <= cmp_c;
    end
    if (active && step == S_T1) dly_q <= n_c;
  end

  // ---------------- final adder (outside the loop) ----------------
  logic [RW-1:0] res;
  assign res = fb_s + fb_c;

  if (OUT_REGS == 0) begin : g_direct
    assign result = res;
    assign done   = done_raw;
  end else begin : g_pipe
    mcim_out_pipe #(.W(RW), .STAGES(OUT_REGS)) u_pipe (
      .clk, .rst_n,
      .in_result (res),
      .in_done   (done_raw),
      .out_result(result),
      .out_done  (done)
    );
  end

  // ---------------- interface rules ----------------
  a_no_start_busy: assert property (@(posedge clk) disable iff (!rst_n)
    start |-> !busy)
    else $error("mcim_karatsuba: start while a multiplication is in progress");
  a_hold_operands: assert property (@(posedge clk) disable iff (!rst_n)
    busy |-> ($stable(a) && $stable(b)))
    else $error("mcim_karatsuba: operands changed during a multiplication");

endmodule
