// pipe_delay: a chain of D registers of width W (D = 0 is a plain wire).
//
// The arithmetic units use it to pad their datapath to the cycle counts of the published
// units, and the PEs use it to carry valid bits and indices alongside the data. No reset: the
// contents are only meaningful together with a valid bit that is delayed in a reset chain.
module pipe_delay #(
  parameter int unsigned W = 1,
  parameter int unsigned D = 1
) (
  input  logic         clk,
  input  logic [W-1:0] d,
  output logic [W-1:0] q
);

  if (D == 0) begin : g_wire
    assign q = d;
  end else begin : g_regs
    logic [W-1:0] stage [D];
    always_ff @(posedge clk) begin
      stage[0] <= d;
      for (int i = 1; i < D; i++) stage[i] <= stage[i-1];
    end
    assign q = stage[D-1];
  end

endmodule
