// mcim_out_pipe: output pipeline registers appended to a multi-cycle
// multiplier.
//
// Delays the result and its done strobe by STAGES clock cycles. The paper
// deepens its designs for tight clock targets by adding registers at the end
// and letting synthesis retime them into the logic; this module is those
// registers. Retiming itself is a synthesis step and is not expressed in RTL.
// done is reset (active-low asynchronous rst_n); the result registers are not,
// because they are only read while done is high.
module mcim_out_pipe #(
  parameter int unsigned W      = 256,
  parameter int unsigned STAGES = 1
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [W-1:0] in_result,
  input  logic         in_done,
  output logic [W-1:0] out_result,
  output logic         out_done
);

  logic [STAGES-1:0][W-1:0] res_q;
  logic [STAGES-1:0]        done_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      done_q <= '0;
    end else begin
      done_q[0] <= in_done;
      for (int i = 1; i < STAGES; i++) done_q[i] <= done_q[i-1];
    end
  end

  always_ff @(posedge clk) begin
    res_q[0] <= in_result;
    for (int i = 1; i < STAGES; i++) res_q[i] <= res_q[i-1];
  end

  assign out_result = res_q[STAGES-1];
  assign out_done   = done_q[STAGES-1];

endmodule
