// tb_fir_usecase: four-tap product sum with a six-cycle latency budget, built
// from four 128 x 128 feedforward units.
//
// A sample X (128 bits) is multiplied by four coefficients B0 .. B3 at once
// by four mcim_ff units at cycle time 2 with two output registers (latency
// 4), and the four products are summed by a two-stage adder written in this
// testbench (latency 2), so each sum is due 6 cycles after its sample
// arrives. A new sample arrives every 2 cycles, the rate of the 2-cycle
// units. The sums are checked against the * operator, and each must arrive
// exactly in its cycle.
module tb_fir_usecase;

  localparam int unsigned W = 128;
  localparam int NS = 200;                   // samples

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic             start;
  logic [W-1:0]     x;
  logic [3:0][W-1:0] coef;
  logic [3:0][2*W-1:0] prod;
  logic [3:0]       dn;

  for (genvar k = 0; k < 4; k++) begin : g_tap
    mcim_ff #(.W(W), .CT(2), .OUT_REGS(2)) u_mul (
      .clk, .rst_n, .start, .a(x), .b(coef[k]), .result(prod[k]), .done(dn[k]));
  end

  // two-stage adder tree of the products
  logic [2*W:0]   s01_q, s23_q;
  logic [2*W+1:0] y_q;
  logic           v1_q, v2_q;

  always_ff @(posedge clk) begin
    s01_q <= (2*W+1)'(prod[0]) + (2*W+1)'(prod[1]);
    s23_q <= (2*W+1)'(prod[2]) + (2*W+1)'(prod[3]);
    y_q   <= (2*W+2)'(s01_q) + (2*W+2)'(s23_q);
    v1_q  <= &dn;
    v2_q  <= v1_q;
  end

  int checks = 0, failures = 0;
  longint cyc = 0;
  typedef struct { logic [2*W+1:0] y; longint due; } exp_t;
  exp_t q[$];

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && v2_q) begin
      exp_t e;
      checks++;
      if (q.size() == 0) begin
        failures++;
        $display("FAIL sum with no sample outstanding");
      end else begin
        e = q.pop_front();
        checks++;
        if (y_q !== e.y)   begin failures++; $display("FAIL y %h expected %h", y_q, e.y); end
        if (cyc != e.due)  begin failures++; $display("FAIL y at cycle %0d expected %0d", cyc, e.due); end
      end
    end
  end

  initial begin
    logic [2*W+1:0] ref_y;
    start = 1'b0;
    x = '0;
    for (int k = 0; k < 4; k++) coef[k] = {$urandom, $urandom, $urandom, $urandom};
    coef[3] = '1;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    for (int n = 0; n < NS; n++) begin
      x = (n == 0) ? '1 : {$urandom, $urandom, $urandom, $urandom};
      ref_y = '0;
      for (int k = 0; k < 4; k++) ref_y += (2*W+2)'(x) * (2*W+2)'(coef[k]);
      q.push_back('{y: ref_y, due: cyc + 6});
      start = 1'b1;
      @(negedge clk);
      start = 1'b0;
      @(negedge clk);
    end
    repeat (10) @(negedge clk);
    checks++;
    if (q.size() != 0) begin
      failures++;
      $display("FAIL %0d sums never arrived", q.size());
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

endmodule
