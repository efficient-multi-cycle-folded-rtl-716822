// tb_ppm_array: self-checking testbench of the array partial product
// multiplier.
//
// Checks, for the slice shapes the multipliers use (128 x 43 for the
// feedback unit at cycle time 3, 128 x 64 for the feedforward unit at cycle
// time 2, 16 x 8) and a square 9 x 9, that sum + carry equals a * b exactly:
// the sum is taken one bit wider than the outputs, so a PPM whose two vectors
// overflowed would fail. The 9 x 9 case is exhaustive over a on a few b.
module tb_ppm_array;

  int checks = 0, failures = 0;

  logic [127:0] a1;  logic [42:0] b1;  logic [170:0] s1, c1;
  logic [127:0] a2;  logic [63:0] b2;  logic [191:0] s2, c2;
  logic [15:0]  a3;  logic [7:0]  b3;  logic [23:0]  s3, c3;
  logic [8:0]   a4;  logic [8:0]  b4;  logic [17:0]  s4, c4;

  ppm_array #(.WA(128), .WB(43)) u1 (.a(a1), .b(b1), .sum(s1), .carry(c1));
  ppm_array #(.WA(128), .WB(64)) u2 (.a(a2), .b(b2), .sum(s2), .carry(c2));
  ppm_array #(.WA(16),  .WB(8))  u3 (.a(a3), .b(b3), .sum(s3), .carry(c3));
  ppm_array #(.WA(9),   .WB(9))  u4 (.a(a4), .b(b4), .sum(s4), .carry(c4));

  task automatic chk(logic [192:0] got, logic [192:0] exp, string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: %h expected %h", what, got, exp);
    end
  endtask

  initial begin
    for (int n = 0; n < 1500; n++) begin
      a1 = (n == 0) ? '1 : {$urandom, $urandom, $urandom, $urandom};
      b1 = (n == 0) ? '1 : 43'({$urandom, $urandom});
      a2 = (n == 0) ? '1 : {$urandom, $urandom, $urandom, $urandom};
      b2 = (n == 0) ? '1 : {$urandom, $urandom};
      a3 = (n == 0) ? '1 : 16'($urandom);
      b3 = (n == 0) ? '1 : 8'($urandom);
      #1;
      chk(193'({1'b0, s1} + {1'b0, c1}), 193'(a1) * 193'(b1), "128x43");
      chk(193'({1'b0, s2} + {1'b0, c2}), 193'(a2) * 193'(b2), "128x64");
      chk(193'({1'b0, s3} + {1'b0, c3}), 193'(a3) * 193'(b3), "16x8");
    end
    for (int bb = 0; bb < 512; bb += 37) begin
      for (int aa = 0; aa < 512; aa++) begin
        a4 = 9'(aa);
        b4 = (bb == 0) ? 9'h1ff : 9'(bb);
        #1;
        chk(193'({1'b0, s4} + {1'b0, c4}), 193'(a4) * 193'(b4), "9x9");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

endmodule
