// pipe_delay -- D-stage shift register of W bits (D = 0: a plain wire).
// Used to keep operands of a pipelined decoder stage aligned with results that
// arrive D cycles later.  Data only: no reset, the valid flag travels separately.
module pipe_delay #(
  parameter int unsigned W = 8,
  parameter int unsigned D = 1
) (
  input  logic         clk,
  input  logic [W-1:0] d_i,
  output logic [W-1:0] q_o
);
  if (D == 0) begin : g_wire
    assign q_o = d_i;
  end else begin : g_regs
    logic [W-1:0] sr [D];
    always_ff @(posedge clk) begin
      sr[0] <= d_i;
      for (int unsigned k = 1; k < D; k++) sr[k] <= sr[k-1];
    end
    assign q_o = sr[D-1];
  end
endmodule
