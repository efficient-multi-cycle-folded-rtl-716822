// tb_mcim_fb: self-checking testbench of the feedback multiplier.
//
// Runs several configurations side by side, each driven and checked by a
// tb_mcim_driver: the paper's 16-bit cycle times 2 and 3, a 32-bit unit with
// cycle time 5 (32 is not a multiple of 5, so the operand is padded), a
// 32-bit unit at cycle time 8 with two output registers, and the default
// 128-bit, cycle time 3 unit. Every product is compared with the * operator
// and every done must arrive exactly CT (+ output registers) cycles after its
// start.
module tb_mcim_fb;

  localparam int NCFG = 5;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [NCFG-1:0] fin;
  int chk [NCFG], fl [NCFG], b2b [NCFG], gp [NCFG], sc [NCFG], cn [NCFG];

`define FB_CASE(IDX, WW, CCT, OREG, NN)                                        \
  if (1) begin : g_case_``IDX                                                        \
    logic st; logic [WW-1:0] a, b; logic [2*WW-1:0] r; logic d;                \
    mcim_fb #(.W(WW), .CT(CCT), .OUT_REGS(OREG)) u_dut (                        \
      .clk, .rst_n, .start(st), .a, .b, .result(r), .done(d));                 \
    tb_mcim_driver #(.W(WW), .CT(CCT), .LAT(CCT + OREG), .NOPS(NN)) u_drv (   \
      .clk, .rst_n, .start(st), .a, .b, .result(r), .done(d),                  \
      .finished(fin[IDX]), .checks(chk[IDX]), .failures(fl[IDX]),              \
      .n_back2back(b2b[IDX]), .n_gap(gp[IDX]), .n_sum_carry(sc[IDX]),          \
      .n_corner(cn[IDX]));                                                     \
  end

  `FB_CASE(0, 16, 2, 0, 300)
  `FB_CASE(1, 16, 3, 0, 300)
  `FB_CASE(2, 32, 5, 0, 200)
  `FB_CASE(3, 32, 8, 2, 200)
  `FB_CASE(4, 128, 3, 0, 200)

  int checks, failures;

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    wait (&fin);
    checks = 0;
    failures = 0;
    for (int i = 0; i < NCFG; i++) begin
      checks   += chk[i];
      failures += fl[i];
      // each configuration must have run back-to-back and gapped operations
      checks++;
      if (b2b[i] == 0 || gp[i] == 0 || cn[i] == 0) begin
        failures++;
        $display("FAIL cfg %0d: back-to-back %0d gapped %0d corner %0d", i, b2b[i], gp[i], cn[i]);
      end
    end
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
