// tb_mcim_top: end-to-end testbench of the multiplier bank at its default
// parameters (128 x 128, feedback unit at cycle time 3, feedforward unit at
// cycle time 2, Karatsuba unit with one level of recursion).
//
// Three tb_mcim_driver instances run the three units at the same time, each
// with its own random gaps, so the units start and finish both together and
// apart. Every product is compared with the * operator and every done must
// come exactly at the unit's latency (3, 2 and 3 cycles). The testbench also
// counts how often each mechanism happened and fails if one never did:
// back-to-back operations and idle gaps on every unit, corner operands, the
// Karatsuba operand sums carrying out, two or more units starting in the same
// cycle, and two or more units finishing in the same cycle.
module tb_mcim_top;

  localparam int unsigned W = 128;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic           fb_start, ff_start, ka_start;
  logic [W-1:0]   fb_a, fb_b, ff_a, ff_b, ka_a, ka_b;
  logic [2*W-1:0] fb_r, ff_r, ka_r;
  logic           fb_d, ff_d, ka_d;

  mcim_top u_top (
    .clk, .rst_n,
    .fb_start (fb_start), .fb_a (fb_a), .fb_b (fb_b), .fb_result (fb_r), .fb_done (fb_d),
    .ff_start (ff_start), .ff_a (ff_a), .ff_b (ff_b), .ff_result (ff_r), .ff_done (ff_d),
    .kara_start(ka_start), .kara_a(ka_a), .kara_b(ka_b), .kara_result(ka_r), .kara_done(ka_d)
  );

  logic [2:0] fin;
  int chk [3], fl [3], b2b [3], gp [3], sc [3], cn [3];

  tb_mcim_driver #(.W(W), .CT(3), .LAT(3), .NOPS(400)) u_fb_drv (
    .clk, .rst_n, .start(fb_start), .a(fb_a), .b(fb_b), .result(fb_r), .done(fb_d),
    .finished(fin[0]), .checks(chk[0]), .failures(fl[0]), .n_back2back(b2b[0]),
    .n_gap(gp[0]), .n_sum_carry(sc[0]), .n_corner(cn[0]));
  tb_mcim_driver #(.W(W), .CT(2), .LAT(2), .NOPS(600)) u_ff_drv (
    .clk, .rst_n, .start(ff_start), .a(ff_a), .b(ff_b), .result(ff_r), .done(ff_d),
    .finished(fin[1]), .checks(chk[1]), .failures(fl[1]), .n_back2back(b2b[1]),
    .n_gap(gp[1]), .n_sum_carry(sc[1]), .n_corner(cn[1]));
  tb_mcim_driver #(.W(W), .CT(3), .LAT(3), .NOPS(400)) u_ka_drv (
    .clk, .rst_n, .start(ka_start), .a(ka_a), .b(ka_b), .result(ka_r), .done(ka_d),
    .finished(fin[2]), .checks(chk[2]), .failures(fl[2]), .n_back2back(b2b[2]),
    .n_gap(gp[2]), .n_sum_carry(sc[2]), .n_corner(cn[2]));

  int n_multi_start = 0, n_multi_done = 0;

  always @(posedge clk) begin
    if (rst_n) begin
      if (int'(fb_start) + int'(ff_start) + int'(ka_start) >= 2) n_multi_start++;
      if (int'(fb_d) + int'(ff_d) + int'(ka_d) >= 2)             n_multi_done++;
    end
  end

  int checks = 0, failures = 0;

  task automatic need(int count, string what);
    checks++;
    $display("  %-36s %0d", what, count);
    if (count == 0) begin
      failures++;
      $display("FAIL mechanism never exercised: %s", what);
    end
  endtask

  string nm [3] = '{"feedback", "feedforward", "Karatsuba"};

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    wait (&fin);
    for (int i = 0; i < 3; i++) begin
      checks   += chk[i];
      failures += fl[i];
      $display("%s unit: %0d checks, %0d failures", nm[i], chk[i], fl[i]);
      need(b2b[i], {nm[i], " back-to-back starts"});
      need(gp[i],  {nm[i], " idle gaps"});
      need(cn[i],  {nm[i], " corner operands"});
    end
    need(sc[2],         "Karatsuba operand sums carrying out");
    need(n_multi_start, "cycles with two or more starts");
    need(n_multi_done,  "cycles with two or more results");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

endmodule
