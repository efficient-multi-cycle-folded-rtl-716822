// mcim_fb: feedback (FB) multi-cycle folded integer multiplier.
//
// Computes the unsigned 2W-bit product a * b in CT clock cycles with a single
// W x K partial product multiplier (PPM), K = ceil(W / CT). The operand b is
// cut into CT slices of K bits; a multiplexer, steered by the step counter,
// hands one slice per cycle to the PPM together with the whole of a. The two
// PPM vectors and the fed-back accumulator enter a 3:2 compressor (one row of
// full adders) and a single carry-propagate adder, whose output is the new
// accumulator:
//   acc(0) = a * b[slice CT-1],  acc(i) = acc(i-1) * 2^K + a * b[slice CT-1-i]
// Slices are taken most significant first, so the fed-back value is shifted
// left by the fixed amount K, which is only wiring. In the cycle that start
// is high the fed-back value is forced to zero, which is how the start signal
// clears the accumulator register. The loop runs through the compressor and
// the adder, so the adder cannot be pipelined.
//
// Interface: a and b must be held stable from the start cycle through the
// CT-1 cycles that follow (the paper's drawing has no operand registers).
// start may be raised when the unit is idle, including the cycle in which
// done is high, so a new multiplication can begin every CT cycles.
// Timing: start in cycle 0; done is high in cycle CT (latency CT) and result
// then holds the product. result keeps its value until the cycle after the
// next start. OUT_REGS extra output registers add OUT_REGS cycles.
//
// Follows the paper: one PPM, operand slices through a multiplexer selected
// from start, 3:2 compressor plus one adder in a loop, start clearing the
// feedback register, CT >= 2. This design's own choices: most-significant
// slice first, the step counter, the reset (asynchronous, active low, on the
// control state only), the operand-hold rule and the done strobe.
module mcim_fb
  import mcim_pkg::*;
#(
  parameter int unsigned W        = DEFAULT_W,
  parameter int unsigned CT       = FB_CT_DEFAULT,
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

  localparam int unsigned K   = cdiv(W, CT);       // slice width
  localparam int unsigned PW  = W + K;             // PPM product width
  localparam int unsigned RW  = 2 * W;             // result width
  localparam int unsigned CW  = $clog2(CT);

  initial begin
    assert (CT >= 2) else $error("mcim_fb: CT must be at least 2");
  end

  // ---------------- control: step counter ----------------
  logic          busy;
  logic [CW-1:0] cnt;
  logic [CW-1:0] step;
  logic          active;
  logic          last;
  logic          done_raw;

  assign step   = start ? '0 : cnt;
  assign active = start | busy;
  assign last   = active && (step == CW'(CT - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy     <= 1'b0;
      cnt      <= '0;
      done_raw <= 1'b0;
    end else begin
      done_raw <= last;
      if (start) begin
        busy <= 1'b1;
        cnt  <= CW'(1);
      end else if (busy) begin
        if (cnt == CW'(CT - 1)) begin
          busy <= 1'b0;
          cnt  <= '0;
        end else begin
          cnt <= cnt + CW'(1);
        end
      end
    end
  end

  // ---------------- datapath ----------------
  logic [K*CT-1:0] b_pad;
  logic [K-1:0]    b_slice;
  logic [PW-1:0]   pp_s, pp_c;
  logic [RW-1:0]   acc_q, fb, cmp_s, cmp_c, acc_d;

  always_comb begin
    b_pad   = (K*CT)'(b);
    b_slice = b_pad[(CT - 1 - int'(step)) * K +: K];
  end

  ppm_array #(.WA(W), .WB(K), .OUT_W(PW)) u_ppm (
    .a    (a),
    .b    (b_slice),
    .sum  (pp_s),
    .carry(pp_c)
  );

  // start clears the fed-back value; the shift by K is wiring
  assign fb = start ? '0 : (acc_q << K);

  csa32 #(.W(RW)) u_c32 (
    .x    (fb),
    .y    (RW'(pp_s)),
    .z    (RW'(pp_c)),
    .sum  (cmp_s),
    .carry(cmp_c)
  );

  assign acc_d = cmp_s + cmp_c;

  always_ff @(posedge clk) begin
    if (active) acc_q <= acc_d;
  end

  // ---------------- output ----------------
  if (OUT_REGS == 0) begin : g_direct
    assign result = acc_q;
    assign done   = done_raw;
  end else begin : g_pipe
    mcim_out_pipe #(.W(RW), .STAGES(OUT_REGS)) u_pipe (
      .clk, .rst_n,
      .in_result (acc_q),
      .in_done   (done_raw),
      .out_result(result),
      .out_done  (done)
    );
  end

  // ---------------- interface rules ----------------
  a_no_start_busy: assert property (@(posedge clk) disable iff (!rst_n)
    start |-> !busy)
    else $error("mcim_fb: start while a multiplication is in progress");
  a_hold_operands: assert property (@(posedge clk) disable iff (!rst_n)
    busy |-> ($stable(a) && $stable(b)))
    else $error("mcim_fb: operands changed during a multiplication");

endmodule
