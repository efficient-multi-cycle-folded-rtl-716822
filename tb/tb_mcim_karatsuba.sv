// tb_mcim_karatsuba: self-checking testbench of the three-cycle Karatsuba
// multiplier.
//
// Runs several configurations side by side, each driven and checked by a
// tb_mcim_driver: 16-bit units with a plain PPM and with one level of
// Karatsuba PPM, a 32-bit unit with two output registers, a 64-bit unit with
// two levels and the default 128-bit unit (one level). The driver's corner
// operands make the operand sums a0 + a1 and b0 + b1 carry out, and the
// testbench requires that this happened. Every product is compared with the * operator
// and every done must arrive exactly CT (+ output registers) cycles after its
// start.
module tb_mcim_karatsuba;

  localparam int NCFG = 5;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [NCFG-1:0] fin;
  int chk [NCFG], fl [NCFG], b2b [NCFG], gp [NCFG], sc [NCFG], cn [NCFG];

`define KA_CASE(IDX, WW, LVL, OREG, NN)                                        \
  if (1) begin : g_case_``IDX                                                        \
    logic st; logic [WW-1:0] a, b; logic [2*WW-1:0] r; logic d;                \
    mcim_karatsuba #(.W(WW), .KARA_LEVELS(LVL), .OUT_REGS(OREG)) u_dut (                        \
      .clk, .rst_n, .start(st), .a, .b, .result(r), .done(d));                 \
    tb_mcim_driver #(.W(WW), .CT(3), .LAT(3 + OREG), .NOPS(NN)) u_drv (   \
      .clk, .rst_n, .start(st), .a, .b, .result(r), .done(d),                  \
      .finished(fin[IDX]), .checks(chk[IDX]), .failures(fl[IDX]),              \
      .n_back2back(b2b[IDX]), .n_gap(gp[IDX]), .n_sum_carry(sc[IDX]),          \
      .n_corner(cn[IDX]));                                                     \
  end

  `KA_CASE(0, 16, 0, 0, 300)
  `KA_CASE(1, 16, 1, 0, 300)
  `KA_CASE(2, 32, 1, 2, 200)
  `KA_CASE(3, 64, 2, 0, 200)
  `KA_CASE(4, 128, 1, 0, 200)

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
      if (b2b[i] == 0 || gp[i] == 0 || cn[i] == 0 || sc[i] == 0) begin
        failures++;
        $display("FAIL cfg %0d: back-to-back %0d gapped %0d corner %0d sum-carry %0d", i, b2b[i], gp[i], cn[i], sc[i]);
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
