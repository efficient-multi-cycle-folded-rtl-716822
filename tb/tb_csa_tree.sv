// tb_csa_tree: self-checking testbench of the N:2 carry-save compressor.
//
// Instantiates the tree at the sizes the multipliers use (4:2, 5:2, 10:2)
// and at 1, 3, 6 and 17 inputs, all 64 bits wide, drives them with the same
// random and corner vectors and checks sum + carry against the sum of the
// inputs modulo 2^64.
module tb_csa_tree;

  localparam int unsigned W = 64;
  localparam int unsigned NMAX = 17;

  logic [NMAX-1:0][W-1:0] v;
  int checks = 0, failures = 0;

  localparam int NCFG = 7;
  localparam int SIZES [NCFG] = '{1, 3, 4, 5, 6, 10, 17};
  logic [W-1:0] s [NCFG], c [NCFG];

  for (genvar k = 0; k < NCFG; k++) begin : g_dut
    csa_tree #(.N(SIZES[k]), .W(W)) u_dut (
      .in   (v[SIZES[k]-1:0]),
      .sum  (s[k]),
      .carry(c[k])
    );
  end

  initial begin
    logic [W-1:0] ref_sum;
    for (int n = 0; n < 3000; n++) begin
      for (int i = 0; i < int'(NMAX); i++) begin
        case (n % 8)
          0:       v[i] = '1;
          1:       v[i] = (i % 2 == 0) ? '1 : '0;
          default: v[i] = {$urandom, $urandom};
        endcase
      end
      #1;
      for (int k = 0; k < NCFG; k++) begin
        ref_sum = '0;
        for (int i = 0; i < SIZES[k]; i++) ref_sum += v[i];
        checks++;
        if (s[k] + c[k] !== ref_sum) begin
          failures++;
          $display("FAIL N=%0d: %h + %h != %h", SIZES[k], s[k], c[k], ref_sum);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

endmodule
