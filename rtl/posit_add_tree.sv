// posit_add_tree: sums H posit terms with a balanced tree of pipelined posit adders.
//
// This is the "accumulation of terms" stage of the forward-algorithm PE: the innermost-loop sum
// over p is fully parallel, so H terms enter every cycle and their sum leaves
// ADD_LAT * ceil(log2 H) cycles later (8 * log2 H with the 8-cycle adder). When H is not a power
// of two the missing leaves are tied to posit zero, which adds exactly. Level l of the tree holds
// P >> (l+1) adders, where P is H rounded up to a power of two. The summation order is the tree
// order, which is fixed, so results are reproducible.
//
// Interface: 'x' is sampled every cycle; 'y' = sum(x) appears ADD_LAT * ceil(log2 H) cycles later. No stall.
module posit_add_tree #(
  parameter int unsigned N       = 64,
  parameter int unsigned ES      = 18,
  parameter int unsigned H       = 64,
  parameter int unsigned ADD_LAT = posit_pkg::ADD_LAT,
  localparam int unsigned LEVELS   = (H > 1) ? $clog2(H) : 0
) (
  input  logic         clk,
  input  logic [N-1:0] x [H],
  output logic [N-1:0] y
);

  localparam int unsigned P = 1 << LEVELS;

  logic [N-1:0] node [LEVELS+1][P];

  for (genvar i = 0; i < P; i++) begin : g_leaf
    if (i < H) begin : g_in
      assign node[0][i] = x[i];
    end else begin : g_pad
      assign node[0][i] = '0;
    end
  end

  for (genvar l = 0; l < LEVELS; l++) begin : g_level
    for (genvar i = 0; i < (P >> (l + 1)); i++) begin : g_add
      posit_add #(.N(N), .ES(ES), .LAT(ADD_LAT)) u_add (
        .clk(clk), .a(node[l][2*i]), .b(node[l][2*i+1]), .y(node[l+1][i])
      );
    end
    // unused slots of this level's row
    for (genvar i = (P >> (l + 1)); i < P; i++) begin : g_unused
      assign node[l+1][i] = '0;
    end
  end

  assign y = node[LEVELS][0];

endmodule
