// tb_mcim_ff: self-checking testbench of the feedforward multiplier.
//
// Runs several configurations side by side, each driven and checked by a
// tb_mcim_driver: the paper's 16-bit unit at cycle time 2, the same with four
// output registers (the deep pipeline of the strict-timing results), a 32-bit
// unit at cycle time 3 (6:2 compressor), a 20-bit unit at cycle time 3
// (operand padded), the default 128-bit, cycle time 2 unit, and two units
// whose slice products come from a nested multi-cycle PPM: 16 bits at 2 x 2
// = 4 cycles and 24 bits at 3 x 2 = 6 cycles (latency CT * SUB_CT + 1). Every product is compared with the * operator
// and every done must arrive exactly CT (+ output registers) cycles after its
// start.
module tb_mcim_ff;

  localparam int NCFG = 7;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [NCFG-1:0] fin;
  int chk [NCFG], fl [NCFG], b2b [NCFG], gp [NCFG], sc [NCFG], cn [NCFG];

`define FF_CASE(IDX, WW, CCT, SUB, OREG, NN)                                        \
  if (1) begin : g_case_``IDX                                                        \
    logic st; logic [WW-1:0] a, b; logic [2*WW-1:0] r; logic d;                \
    mcim_ff #(.W(WW), .CT(CCT), .SUB_CT(SUB), .OUT_REGS(OREG)) u_dut (                        \
      .clk, .rst_n, .start(st), .a, .b, .result(r), .done(d));                 \
    tb_mcim_driver #(.W(WW), .CT(CCT * SUB), .LAT((SUB == 1 ? CCT : CCT * SUB + 1) + OREG), .NOPS(NN)) u_drv (   \
      .clk, .rst_n, .start(st), .a, .b, .result(r), .done(d),                  \
      .finished(fin[IDX]), .checks(chk[IDX]), .failures(fl[IDX]),              \
      .n_back2back(b2b[IDX]), .n_gap(gp[IDX]), .n_sum_carry(sc[IDX]),          \
      .n_corner(cn[IDX]));                                                     \
  end

  `FF_CASE(0, 16, 2, 1, 0, 300)
  `FF_CASE(1, 16, 2, 1, 4, 300)
  `FF_CASE(2, 32, 3, 1, 0, 200)
  `FF_CASE(3, 20, 3, 1, 1, 200)
  `FF_CASE(4, 128, 2, 1, 0, 200)
  `FF_CASE(5, 16, 2, 2, 0, 200)
  `FF_CASE(6, 24, 3, 2, 1, 200)

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
