// tb_fau_pe: checks the forward-algorithm PE's result, index and 24 + 8 * log2 H latency.
//
// Two PEs, posit(16,2) with H = 4 and H = 3 (padded tree), get a random input set on random
// cycles (about 70 % of cycles valid). Each result must appear exactly PE_LAT cycles after its
// inputs, with the same index, and equal (sum_p alpha_prev[p] * a_col[p]) * b_prob computed by
// the reference model in the PE's order (products, pairwise tree with zero padding, emission
// product). No result may appear on a cycle without a matching input.
module tb_fau_pe;
  import posit_ref_pkg::*;

  localparam int N = 16, ES = 2;
  localparam int LAT4 = 24 + 8 * 2, LAT3 = 24 + 8 * 2;
  localparam int NV = 2000;

  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n = 1'b0;
  int checks = 0, failures = 0;

  logic          v_in = 0;
  logic [7:0]    idx = 0;
  logic [N-1:0]  ap4 [4], ac4 [4], ap3 [3], ac3 [3], b = 0;
  logic          ov4, ov3;
  logic [7:0]    oi4, oi3;
  logic [N-1:0]  o4, o3;

  fau_pe #(.N(N), .ES(ES), .H(4)) dut4 (
    .clk(clk), .rst_n(rst_n), .in_valid(v_in), .in_idx(idx), .alpha_prev(ap4), .a_col(ac4),
    .b_prob(b), .out_valid(ov4), .out_idx(oi4), .alpha(o4)
  );
  fau_pe #(.N(N), .ES(ES), .H(3)) dut3 (
    .clk(clk), .rst_n(rst_n), .in_valid(v_in), .in_idx(idx), .alpha_prev(ap3), .a_col(ac3),
    .b_prob(b), .out_valid(ov3), .out_idx(oi3), .alpha(o3)
  );

  function automatic logic [63:0] ref_pe(logic [63:0] ap [], logic [63:0] ac [], logic [63:0] bb);
    logic [63:0] l [];
    int w;
    w = 1;
    while (w < ap.size()) w *= 2;
    l = new[w];
    foreach (l[i]) l[i] = (i < ap.size()) ? mul(ap[i], ac[i], N, ES) : 0;
    while (w > 1) begin
      for (int i = 0; i < w / 2; i++) l[i] = add(l[2*i], l[2*i+1], N, ES);
      w /= 2;
    end
    return mul(l[0], bb, N, ES);
  endfunction

  bit           vq [NV + 100];
  logic [7:0]   iq [NV + 100];
  logic [N-1:0] e4 [NV + 100], e3 [NV + 100];

  initial begin
    logic [63:0] a4 [], c4 [], a3 [], c3 [];
    a4 = new[4]; c4 = new[4]; a3 = new[3]; c3 = new[3];
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int c = 0; c < NV + LAT4 + 2; c++) begin
      @(negedge clk);
      v_in = (c < NV) && ($urandom_range(9) < 7);
      idx = 8'($urandom);
      b = N'($urandom);
      foreach (a4[i]) begin a4[i] = 64'(N'($urandom)); c4[i] = 64'(N'($urandom)); ap4[i] = a4[i][N-1:0]; ac4[i] = c4[i][N-1:0]; end
      foreach (a3[i]) begin a3[i] = 64'(N'($urandom)); c3[i] = 64'(N'($urandom)); ap3[i] = a3[i][N-1:0]; ac3[i] = c3[i][N-1:0]; end
      vq[c] = v_in;
      iq[c] = idx;
      e4[c] = N'(ref_pe(a4, c4, 64'(b)));
      e3[c] = N'(ref_pe(a3, c3, 64'(b)));
      // output visible now belongs to the input presented LAT cycles ago
      if (c >= LAT4) begin
        int j;
        j = c - LAT4;
        checks++;
        if (ov4 !== vq[j] || ov3 !== vq[j]) begin
          failures++;
          $display("cycle %0d: valid %b/%b expected %b", c, ov4, ov3, vq[j]);
        end else if (vq[j]) begin
          checks += 2;
          if (o4 !== e4[j] || oi4 !== iq[j]) begin
            failures++;
            $display("H=4 #%0d: %h idx %0d expected %h idx %0d", j, o4, oi4, e4[j], iq[j]);
          end
          if (o3 !== e3[j] || oi3 !== iq[j]) begin
            failures++;
            $display("H=3 #%0d: %h idx %0d expected %h idx %0d", j, o3, oi3, e3[j], iq[j]);
          end
        end
      end
      if (failures > 10) break;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (NV + 1000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
