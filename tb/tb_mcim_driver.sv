// tb_mcim_driver: stimulus and scoreboard for one multi-cycle multiplier.
//
// Issues NOPS unsigned multiplications to a unit with cycle time CT and
// latency LAT (cycles from the start cycle to the cycle in which done is
// high). Operands are held for CT cycles as the units require. The gap
// between operations is chosen at random: often zero, so that a new start
// falls in the first cycle the unit is free (back to back), sometimes several
// idle cycles. Operands mix random values with corner cases (zero, all ones,
// alternating bits, a lone top bit; all ones also makes the Karatsuba operand
// sums carry out). Each start pushes the reference product, computed here with
// the * operator on 2W-bit values, and the cycle in which done is due; each
// done pops one entry and is checked for value and cycle. A done with nothing
// outstanding is a failure, and so is an operation whose done never comes.
module tb_mcim_driver #(
  parameter int unsigned W    = 16,
  parameter int unsigned CT   = 2,
  parameter int unsigned LAT  = 2,
  parameter int unsigned NOPS = 100
) (
  input  logic           clk,
  input  logic           rst_n,
  output logic           start,
  output logic [W-1:0]   a,
  output logic [W-1:0]   b,
  input  logic [2*W-1:0] result,
  input  logic           done,
  output logic           finished,
  output int             checks,
  output int             failures,
  output int             n_back2back,
  output int             n_gap,
  output int             n_sum_carry,
  output int             n_corner
);

  localparam int unsigned H = W / 2;

  typedef struct {
    logic [2*W-1:0] prod;
    longint         due;
  } expect_t;

  expect_t q[$];
  longint  cyc;

  function automatic logic [W-1:0] rand_w();
    logic [W-1:0] v;
    for (int i = 0; i < W; i += 32) v = (v << 32) | W'($urandom);
    return v;
  endfunction

  function automatic logic [W-1:0] pick(int sel);
    logic [W-1:0] v;
    case (sel)
      0:       v = '0;
      1:       v = '1;
      2:       for (int i = 0; i < W; i++) v[i] = i[0];
      3:       v = W'(1) << (W - 1);
      4:       v = ~(W'(1) << (W - 1));
      default: v = rand_w();
    endcase
    return v;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) cyc <= 0;
    else        cyc <= cyc + 1;
  end

  // scoreboard
  always @(posedge clk) begin
    if (rst_n && done) begin
      checks++;
      if (q.size() == 0) begin
        failures++;
        $display("FAIL W=%0d CT=%0d: done with no operation outstanding at cycle %0d", W, CT, cyc);
      end else begin
        expect_t e;
        e = q.pop_front();
        if (result !== e.prod) begin
          failures++;
          $display("FAIL W=%0d CT=%0d: result %h expected %h", W, CT, result, e.prod);
        end
        checks++;
        if (cyc != e.due) begin
          failures++;
          $display("FAIL W=%0d CT=%0d: done at cycle %0d expected %0d", W, CT, cyc, e.due);
        end
      end
    end
  end

  initial begin
    int gap;
    int sa, sb;
    start       = 1'b0;
    a           = '0;
    b           = '0;
    finished    = 1'b0;
    checks      = 0;
    failures    = 0;
    n_back2back = 0;
    n_gap       = 0;
    n_sum_carry = 0;
    n_corner    = 0;
    @(posedge rst_n);
    @(negedge clk);
    for (int op = 0; op < int'(NOPS); op++) begin
      gap = ($urandom % 4 == 0) ? int'($urandom % 4) + 1 : 0;
      if (op > 0) begin
        if (gap == 0) n_back2back++;
        else          n_gap++;
      end
      repeat (gap) @(negedge clk);
      sa = (op < 36) ? op % 6 : int'($urandom % 10);
      sb = (op < 36) ? op / 6 : int'($urandom % 10);
      a  = pick(sa);
      b  = pick(sb);
      if (sa < 5 || sb < 5) n_corner++;
      if (W >= 4 && ((W'(a[H-1:0]) + W'(a >> H)) >> H) != 0 &&
                    ((W'(b[H-1:0]) + W'(b >> H)) >> H) != 0) n_sum_carry++;
      start = 1'b1;
      q.push_back('{prod: (2*W)'(a) * (2*W)'(b), due: cyc + longint'(LAT)});
      @(negedge clk);
      start = 1'b0;
      repeat (CT - 1) @(negedge clk);
    end
    repeat (LAT + 2) @(negedge clk);
    checks++;
    if (q.size() != 0) begin
      failures++;
      $display("FAIL W=%0d CT=%0d: %0d operations never completed", W, CT, q.size());
    end
    finished = 1'b1;
  end

endmodule
