// tb_ppm_kara: self-checking testbench of the recursive Karatsuba partial
// product multiplier.
//
// Instantiates the 65-bit PPM of the default Karatsuba multiplier (one level
// of recursion, 256-bit vectors), the same with two levels, a 16-bit one with
// one level and an 8-bit one with no recursion, and checks
// sum + carry == a * b modulo the output width. Corner operands (all ones,
// halves that make the operand sums carry out, zero) come first.
module tb_ppm_kara;

  int checks = 0, failures = 0;

  logic [64:0] a1, b1;  logic [255:0] s1, c1, s2, c2;
  logic [15:0] a3, b3;  logic [31:0]  s3, c3;
  logic [7:0]  a4, b4;  logic [15:0]  s4, c4;

  ppm_kara #(.N(65), .OUT_W(256), .LEVELS(1)) u1 (.a(a1), .b(b1), .sum(s1), .carry(c1));
  ppm_kara #(.N(65), .OUT_W(256), .LEVELS(2)) u2 (.a(a1), .b(b1), .sum(s2), .carry(c2));
  ppm_kara #(.N(16), .OUT_W(32),  .LEVELS(1)) u3 (.a(a3), .b(b3), .sum(s3), .carry(c3));
  ppm_kara #(.N(8),  .OUT_W(16),  .LEVELS(0)) u4 (.a(a4), .b(b4), .sum(s4), .carry(c4));

  task automatic chk(logic [255:0] got, logic [255:0] exp, string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: %h expected %h", what, got, exp);
    end
  endtask

  initial begin
    for (int n = 0; n < 3000; n++) begin
      case (n)
        0: begin a1 = '1; b1 = '1; end
        1: begin a1 = '0; b1 = '1; end
        2: begin a1 = {1'b0, {32{1'b1}}, {32{1'b1}}}; b1 = {1'b1, 64'd0}; end
        default: begin
          a1 = 65'({$urandom, $urandom, $urandom});
          b1 = 65'({$urandom, $urandom, $urandom});
        end
      endcase
      a3 = (n == 0) ? '1 : 16'($urandom);
      b3 = (n == 0) ? '1 : 16'($urandom);
      a4 = (n == 0) ? '1 : 8'($urandom);
      b4 = (n == 0) ? '1 : 8'($urandom);
      #1;
      chk(s1 + c1, 256'(a1) * 256'(b1), "65 bits, 1 level");
      chk(s2 + c2, 256'(a1) * 256'(b1), "65 bits, 2 levels");
      chk(256'(32'(s3 + c3)), 256'(a3) * 256'(b3), "16 bits, 1 level");
      chk(256'(16'(s4 + c4)), 256'(a4) * 256'(b4), "8 bits, leaf");
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
