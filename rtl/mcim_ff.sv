// mcim_ff: feedforward (FF) multi-cycle folded integer multiplier.
//
// Computes the unsigned 2W-bit product a * b in CT clock cycles (default 2)
// with one W x K partial product multiplier (PPM), K = ceil(W / CT), and no
// feedback loop. The operand b is cut into CT slices of K bits, least
// significant first; in step i the PPM forms the two vectors of a * b[slice i].
// The vectors of steps 0 .. CT-2 are stored in registers. In the last step
// the stored vectors (shifted left by i*K) and the current vectors (shifted
// left by (CT-1)*K) enter a 2*CT:2 compressor (4:2 at CT = 2), whose two
// outputs are registered; a final adder after those registers produces the
// product. Shifts are fixed, so they are wiring. Without a loop, every stage
// can be pipelined, the final adder included.
//
// All of this up to the registered compressor outputs is mcppm_ff, the
// multi-cycle PPM; this module adds the final adder and the output registers.
// With SUB_CT > 1 the PPM of each slice is itself a multi-cycle PPM of cycle
// time SUB_CT, so the whole unit takes CT * SUB_CT cycles per product.
//
// Interface: a and b must be held stable from the start cycle through the
// CT*SUB_CT - 1 cycles that follow. start may be raised again CT*SUB_CT
// cycles after the previous start, which is the cycle in which done is high
// when SUB_CT = 1.
// Timing: start in cycle 0; done is high in cycle L and result holds the
// product, L = CT for SUB_CT = 1 and CT*SUB_CT + 1 otherwise; result keeps
// its value until the next product is written. OUT_REGS extra output
// registers add OUT_REGS cycles.
//
// Follows the paper: PPM behind an operand multiplexer, PPM results held in
// registers, left shifts on the current vectors, 4:2 compressor and a
// separate final adder; omitting that adder gives a multi-cycle PPM that can
// be nested. The paper evaluates this unit at CT = 2 only; other CT values
// generalise it the way its text describes (more stored vectors, a wider
// compressor). This design's own choices: slice order, counters, reset
// (asynchronous, active low, control only), the operand-hold rule and the
// done strobe.
module mcim_ff
  import mcim_pkg::*;
#(
  parameter int unsigned W        = DEFAULT_W,
  parameter int unsigned CT       = FF_CT_DEFAULT,
  parameter int unsigned SUB_CT   = 1,
  parameter int unsigned OUT_REGS = 0
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           start,
  input  logic [W-1:0]   a,
  input  logic [W-1:0]   b,
  output logic [2*W-1:0] result,
  output logic           done
);

  localparam int unsigned RW = 2 * W;

  logic [RW-1:0] cs_s, cs_c, res;
  logic          cs_done;

  mcppm_ff #(.WA(W), .WB(W), .CT(CT), .SUB_CT(SUB_CT), .OUT_W(RW)) u_mcppm (
    .clk, .rst_n,
    .start,
    .a,
    .b,
    .sum  (cs_s),
    .carry(cs_c),
    .done (cs_done)
  );

  // final adder, outside any loop
  assign res = cs_s + cs_c;

  if (OUT_REGS == 0) begin : g_direct
    assign result = res;
    assign done   = cs_done;
  end else begin : g_pipe
    mcim_out_pipe #(.W(RW), .STAGES(OUT_REGS)) u_pipe (
      .clk, .rst_n,
      .in_result (res),
      .in_done   (cs_done),
      .out_result(result),
      .out_done  (done)
    );
  end

endmodule
