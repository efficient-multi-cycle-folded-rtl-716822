// tb_csa32: self-checking testbench of the 3:2 carry-save row.
//
// Drives the default 256-bit row with random and corner vectors (all ones,
// alternating bits, zero) and checks both outputs bit by bit against the
// full-adder equations and their sum against x + y + z modulo 2^256.
module tb_csa32;

  localparam int unsigned W = 256;

  logic [W-1:0] x, y, z, s, c;
  int checks = 0, failures = 0;

  csa32 #(.W(W)) u_dut (.x, .y, .z, .sum(s), .carry(c));

  function automatic logic [W-1:0] rnd(int sel);
    logic [W-1:0] v;
    case (sel)
      0: v = '0;
      1: v = '1;
      2: for (int i = 0; i < W; i++) v[i] = i[0];
      default: for (int i = 0; i < W; i += 32) v = (v << 32) | W'($urandom);
    endcase
    return v;
  endfunction

  initial begin
    logic [W-1:0] es, ec;
    for (int n = 0; n < 2000; n++) begin
      x = rnd(n < 64 ? n % 4 : 3);
      y = rnd(n < 64 ? (n / 4) % 4 : 3);
      z = rnd(n < 64 ? (n / 16) % 4 : 3);
      #1;
      es = '0;
      ec = '0;
      for (int i = 0; i < W; i++) begin
        es[i] = x[i] + y[i] + z[i] == 1 || x[i] + y[i] + z[i] == 3;
        if (i + 1 < W) ec[i+1] = int'(x[i]) + int'(y[i]) + int'(z[i]) >= 2;
      end
      checks += 3;
      if (s !== es) begin failures++; $display("FAIL sum bits"); end
      if (c !== ec) begin failures++; $display("FAIL carry bits"); end
      if (s + c !== x + y + z) begin failures++; $display("FAIL s + c != x + y + z"); end
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
