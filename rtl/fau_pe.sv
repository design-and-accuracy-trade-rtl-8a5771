// fau_pe: processing element of the forward-algorithm unit (one inner-loop iteration per cycle).
//
// For a destination state q it computes alpha[q] = (sum over p of alpha_prev[p] * A[p][q]) * B[q][o_t],
// the body of the forward algorithm's inner loop. The innermost loop over p is unrolled: H posit
// multipliers form all H terms at once (12 cycles), a reduction tree of posit adders sums them
// (8 * log2 H cycles) and one more multiplier applies the emission probability (12 cycles).
// The latency is therefore PE_LAT = 24 + 8 * log2 H cycles (72 for H = 64) and a new q can enter
// every cycle; this structure and these cycle counts are the published posit PE's. The PE is
// hard-wired for its H. b_prob is delayed inside the PE so that the caller presents every input
// of one iteration in the same cycle.
//
// Interface: when in_valid is high, alpha_prev, a_col (A[0..H-1][q]), b_prob and in_idx (= q) are
// taken; PE_LAT cycles later out_valid is high with alpha and out_idx = q. No stall.
module fau_pe #(
  parameter int unsigned N       = 64,
  parameter int unsigned ES      = 18,
  parameter int unsigned H       = 64,
  parameter int unsigned IDX_W   = 8,
  parameter int unsigned MUL_LAT = posit_pkg::MUL_LAT,
  parameter int unsigned ADD_LAT = posit_pkg::ADD_LAT,
  localparam int unsigned TREE_LAT = ADD_LAT * ((H > 1) ? $clog2(H) : 0),
  localparam int unsigned PE_LAT   = 2 * MUL_LAT + TREE_LAT
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  logic [IDX_W-1:0] in_idx,
  input  logic [N-1:0]     alpha_prev [H],
  input  logic [N-1:0]     a_col [H],
  input  logic [N-1:0]     b_prob,
  output logic             out_valid,
  output logic [IDX_W-1:0] out_idx,
  output logic [N-1:0]     alpha
);

  logic [N-1:0] terms [H];
  logic [N-1:0] path_sum;
  logic [N-1:0] b_dly;

  // compute terms: fully parallel
  for (genvar p = 0; p < H; p++) begin : g_term
    posit_mul #(.N(N), .ES(ES), .LAT(MUL_LAT)) u_mul (
      .clk(clk), .a(alpha_prev[p]), .b(a_col[p]), .y(terms[p])
    );
  end

  // accumulation of terms: parallel reduction tree
  posit_add_tree #(.N(N), .ES(ES), .H(H), .ADD_LAT(ADD_LAT)) u_tree (
    .clk(clk), .x(terms), .y(path_sum)
  );

  // multiplication by the emission probability
  pipe_delay #(.W(N), .D(MUL_LAT + TREE_LAT)) u_bdly (.clk(clk), .d(b_prob), .q(b_dly));

  posit_mul #(.N(N), .ES(ES), .LAT(MUL_LAT)) u_emit (
    .clk(clk), .a(path_sum), .b(b_dly), .y(alpha)
  );

  // valid and index travel alongside the data
  logic [PE_LAT-1:0] vld;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) vld <= '0;
    else        vld <= {vld[PE_LAT-2:0], in_valid};
  end
  assign out_valid = vld[PE_LAT-1];

  pipe_delay #(.W(IDX_W), .D(PE_LAT)) u_idly (.clk(clk), .d(in_idx), .q(out_idx));

endmodule
