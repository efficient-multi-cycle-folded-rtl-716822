// tb_mcim_workloads: every multiplier configuration of the evaluation tables,
// run side by side.
//
//   relaxed timing (latency = CT):  16 x 16 feedback CT 2 and 3, feedforward
//     CT 2; 128 x 128 feedforward CT 2, feedback CT 2 and 3, Karatsuba CT 3
//   tight timing (deeper pipelines, latency L): 16 x 16 feedforward L 9,
//     feedback CT 2 L 4, feedback CT 3 L 9; 128 x 128 feedforward L 4,
//     feedback CT 2 L 4, feedback CT 3 L 6, Karatsuba L 7. The extra cycles
//     are OUT_REGS = L - CT output registers.
//   32 x 32 feedback at every CT from 2 to 8.
//
// Each configuration is driven and checked by a tb_mcim_driver: products
// against the * operator, done exactly at the stated latency, back-to-back
// and gapped operations.
module tb_mcim_workloads;

  localparam int NCFG = 21;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [NCFG-1:0] fin;
  int chk [NCFG], fl [NCFG], b2b [NCFG], gp [NCFG], sc [NCFG], cn [NCFG];

`define WL_DRV(IDX, WW, CCT, LL, NN)                                            \
    tb_mcim_driver #(.W(WW), .CT(CCT), .LAT(LL), .NOPS(NN)) u_drv (             \
      .clk, .rst_n, .start(st), .a, .b, .result(r), .done(d),                  \
      .finished(fin[IDX]), .checks(chk[IDX]), .failures(fl[IDX]),              \
      .n_back2back(b2b[IDX]), .n_gap(gp[IDX]), .n_sum_carry(sc[IDX]),          \
      .n_corner(cn[IDX]));

`define WL_FB(IDX, WW, CCT, LL)                                                 \
  if (1) begin : g_case_``IDX                                                  \
    logic st; logic [WW-1:0] a, b; logic [2*WW-1:0] r; logic d;                \
    mcim_fb #(.W(WW), .CT(CCT), .OUT_REGS(LL - CCT)) u_dut (                    \
      .clk, .rst_n, .start(st), .a, .b, .result(r), .done(d));                 \
    `WL_DRV(IDX, WW, CCT, LL, 100)                                             \
  end

`define WL_FF(IDX, WW, LL)                                                      \
  if (1) begin : g_case_``IDX                                                  \
    logic st; logic [WW-1:0] a, b; logic [2*WW-1:0] r; logic d;                \
    mcim_ff #(.W(WW), .CT(2), .OUT_REGS(LL - 2)) u_dut (                        \
      .clk, .rst_n, .start(st), .a, .b, .result(r), .done(d));                 \
    `WL_DRV(IDX, WW, 2, LL, 100)                                               \
  end

`define WL_KA(IDX, WW, LL)                                                      \
  if (1) begin : g_case_``IDX                                                  \
    logic st; logic [WW-1:0] a, b; logic [2*WW-1:0] r; logic d;                \
    mcim_karatsuba #(.W(WW), .OUT_REGS(LL - 3)) u_dut (                         \
      .clk, .rst_n, .start(st), .a, .b, .result(r), .done(d));                 \
    `WL_DRV(IDX, WW, 3, LL, 100)                                               \
  end

  // relaxed timing
  `WL_FB(0, 16, 2, 2)
  `WL_FB(1, 16, 3, 3)
  `WL_FF(2, 16, 2)
  `WL_FF(3, 128, 2)
  `WL_FB(4, 128, 2, 2)
  `WL_FB(5, 128, 3, 3)
  `WL_KA(6, 128, 3)
  // tight timing
  `WL_FF(7, 16, 9)
  `WL_FB(8, 16, 2, 4)
  `WL_FB(9, 16, 3, 9)
  `WL_FF(10, 128, 4)
  `WL_FB(11, 128, 2, 4)
  `WL_FB(12, 128, 3, 6)
  `WL_KA(13, 128, 7)
  // 32 x 32 feedback, CT 2 .. 8
  `WL_FB(14, 32, 2, 2)
  `WL_FB(15, 32, 3, 3)
  `WL_FB(16, 32, 4, 4)
  `WL_FB(17, 32, 5, 5)
  `WL_FB(18, 32, 6, 6)
  `WL_FB(19, 32, 7, 7)
  `WL_FB(20, 32, 8, 8)

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
      checks++;
      if (b2b[i] == 0 || gp[i] == 0) begin
        failures++;
        $display("FAIL cfg %0d: back-to-back %0d gapped %0d", i, b2b[i], gp[i]);
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
