// tb_mcppm_ff: self-checking testbench of the feedforward multi-cycle
// partial product multiplier.
//
// The unit returns the product as two vectors; the testbench adds them
// itself (one bit wider than the vectors, so an overflowing pair would show)
// and hands the sum to a tb_mcim_driver, which checks it against the *
// operator and checks that done comes exactly at the latency: CT for a
// combinational inner PPM, CT * SUB_CT + 1 for a nested multi-cycle one.
// Configurations: 16 bits at CT 2, 16 bits at CT 3 over a 2-cycle inner PPM,
// 32 bits at CT 2 over a 3-cycle inner PPM, 128 bits at CT 2 over a 2-cycle
// inner PPM.
module tb_mcppm_ff;

  localparam int NCFG = 4;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [NCFG-1:0] fin;
  int chk [NCFG], fl [NCFG], b2b [NCFG], gp [NCFG], sc [NCFG], cn [NCFG];

`define MP_CASE(IDX, WW, CCT, SUB, NN)                                          \
  if (1) begin : g_case_``IDX                                                  \
    logic st; logic [WW-1:0] a, b; logic [2*WW-1:0] s, c; logic d;             \
    logic [2*WW:0] full;                                                       \
    logic [2*WW-1:0] r;                                                        \
    mcppm_ff #(.WA(WW), .WB(WW), .CT(CCT), .SUB_CT(SUB)) u_dut (                \
      .clk, .rst_n, .start(st), .a, .b, .sum(s), .carry(c), .done(d));         \
    assign full = {1'b0, s} + {1'b0, c};                                       \
    assign r = full[2*WW] ? ~full[2*WW-1:0] : full[2*WW-1:0];                  \
    tb_mcim_driver #(.W(WW), .CT(CCT * SUB),                                   \
                     .LAT(SUB == 1 ? CCT : CCT * SUB + 1), .NOPS(NN)) u_drv (  \
      .clk, .rst_n, .start(st), .a, .b, .result(r), .done(d),                  \
      .finished(fin[IDX]), .checks(chk[IDX]), .failures(fl[IDX]),              \
      .n_back2back(b2b[IDX]), .n_gap(gp[IDX]), .n_sum_carry(sc[IDX]),          \
      .n_corner(cn[IDX]));                                                     \
  end

  `MP_CASE(0, 16, 2, 1, 300)
  `MP_CASE(1, 16, 3, 2, 200)
  `MP_CASE(2, 32, 2, 3, 200)
  `MP_CASE(3, 128, 2, 2, 200)

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
