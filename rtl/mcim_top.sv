// mcim_top: a bank of the three proposed multi-cycle folded integer
// multipliers (MCIMs) at the 128 x 128 size.
//
// Holds one multiplier of each architecture, each with its own operands,
// start, result and done, and each able to run at the same time as the
// others:
//   fb_*   : feedback unit, FB_CT cycles per product (default 3)
//   ff_*   : feedforward unit, FF_CT cycles per product (default 2)
//   kara_* : Karatsuba unit, 3 cycles per product, KARA_LEVELS levels of
//            Karatsuba recursion inside its partial product multiplier
// A system that needs a fractional rate of multiplications per cycle uses
// these units side by side: for instance, one 2-cycle and one 3-cycle unit
// together give 5/6 products per cycle.
//
// Every unit computes the unsigned 2W-bit product of two W-bit operands.
// Operands must be held from the start cycle through the following CT-1
// cycles; done is high CT cycles after start (plus OUT_REGS) while result
// holds the product. rst_n is an asynchronous active-low reset of the
// control state.
//
// Putting the three architectures into one bank is this design's own way of
// exercising them together; the paper presents them as alternatives produced
// by one generator and discusses combining units for fractional throughput.
module mcim_top
  import mcim_pkg::*;
#(
  parameter int unsigned W           = DEFAULT_W,
  parameter int unsigned FB_CT       = FB_CT_DEFAULT,
  parameter int unsigned FF_CT       = FF_CT_DEFAULT,
  parameter int unsigned KARA_LEVELS = 1,
  parameter int unsigned OUT_REGS    = 0
) (
  input  logic           clk,
  input  logic           rst_n,
  // feedback unit
  input  logic           fb_start,
  input  logic [W-1:0]   fb_a,
  input  logic [W-1:0]   fb_b,
  output logic [2*W-1:0] fb_result,
  output logic           fb_done,
  // feedforward unit
  input  logic           ff_start,
  input  logic [W-1:0]   ff_a,
  input  logic [W-1:0]   ff_b,
  output logic [2*W-1:0] ff_result,
  output logic           ff_done,
  // Karatsuba unit
  input  logic           kara_start,
  input  logic [W-1:0]   kara_a,
  input  logic [W-1:0]   kara_b,
  output logic [2*W-1:0] kara_result,
  output logic           kara_done
);

  mcim_fb #(.W(W), .CT(FB_CT), .OUT_REGS(OUT_REGS)) u_fb (
    .clk, .rst_n,
    .start (fb_start),
    .a     (fb_a),
    .b     (fb_b),
    .result(fb_result),
    .done  (fb_done)
  );

  mcim_ff #(.W(W), .CT(FF_CT), .OUT_REGS(OUT_REGS)) u_ff (
    .clk, .rst_n,
    .start (ff_start),
    .a     (ff_a),
    .b     (ff_b),
    .result(ff_result),
    .done  (ff_done)
  );

  mcim_karatsuba #(.W(W), .KARA_LEVELS(KARA_LEVELS), .OUT_REGS(OUT_REGS)) u_kara (
    .clk, .rst_n,
    .start (kara_start),
    .a     (kara_a),
    .b     (kara_b),
    .result(kara_result),
    .done  (kara_done)
  );

endmodule
