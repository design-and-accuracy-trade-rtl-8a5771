// tb_posit_add_tree: checks the reduction tree's sums and its 8 * ceil(log2 H) latency.
//
// Three trees run at once: posit(16,2) with H = 5 (padded to 8 leaves) and H = 8, both with
// random full-width inputs, and the default posit(64,18), H = 64 tree with inputs of 16-bit
// fractions at nearby scales (so the reference stays exact). A new vector enters every cycle
// and each sum is compared with the reference tree sum exactly TREE_LAT cycles later.
module tb_posit_add_tree;
  import posit_ref_pkg::*;

  localparam int NV = 3000;

  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [15:0] x5 [5], x8 [8], y5, y8;
  logic [63:0] x64 [64], y64;
  logic [15:0] e5 [NV], e8 [NV];
  logic [63:0] e64 [NV];

  posit_add_tree #(.N(16), .ES(2), .H(5)) dut5  (.clk(clk), .x(x5), .y(y5));
  posit_add_tree #(.N(16), .ES(2), .H(8)) dut8  (.clk(clk), .x(x8), .y(y8));
  posit_add_tree                          dut64 (.clk(clk), .x(x64), .y(y64));

  // reference: pairwise tree over n leaves padded with zeros to a power of two
  function automatic logic [63:0] tsum(logic [63:0] v [], int n, int es);
    logic [63:0] l [];
    int w;
    w = 1;
    while (w < v.size()) w *= 2;
    l = new[w];
    foreach (l[i]) l[i] = (i < v.size()) ? v[i] : 0;
    while (w > 1) begin
      for (int i = 0; i < w / 2; i++) l[i] = add(l[2*i], l[2*i+1], n, es);
      w /= 2;
    end
    return l[0];
  endfunction

  initial begin
    logic [63:0] v5 [], v8 [], v64 [];
    v5 = new[5]; v8 = new[8]; v64 = new[64];
    for (int c = 0; c < NV + 48; c++) begin
      if (c < NV) begin
        foreach (v5[i])  begin v5[i] = 64'(16'($urandom)); x5[i] = v5[i][15:0]; end
        foreach (v8[i])  begin v8[i] = 64'(16'($urandom)); x8[i] = v8[i][15:0]; end
        foreach (v64[i]) begin v64[i] = rand_posit(64, 18, 16, 8); x64[i] = v64[i]; end
        e5[c]  = tsum(v5, 16, 2)[15:0];
        e8[c]  = tsum(v8, 16, 2)[15:0];
        e64[c] = tsum(v64, 64, 18);
      end
      @(posedge clk);
      #1;
      if (c >= 23 && c - 23 < NV) begin          // 3 levels: 24 cycles
        checks += 2;
        if (y5 !== e5[c-23]) begin failures++; $display("H=5 #%0d %h exp %h", c-23, y5, e5[c-23]); end
        if (y8 !== e8[c-23]) begin failures++; $display("H=8 #%0d %h exp %h", c-23, y8, e8[c-23]); end
      end
      if (c >= 47 && c - 47 < NV) begin          // 6 levels: 48 cycles
        checks++;
        if (y64 !== e64[c-47]) begin failures++; $display("H=64 #%0d %h exp %h", c-47, y64, e64[c-47]); end
      end
      if (failures > 10) break;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (NV + 2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
