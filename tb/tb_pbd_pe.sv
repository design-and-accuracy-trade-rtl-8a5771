// tb_pbd_pe: checks the column-unit PE against the LoFreq column loop run in the reference model.
//
// Two PEs run: posit(16,2) with random success probabilities and several (K, NT) pairs,
// including NT <= K (no p-value term) and K = 1, and the default posit(64,12) with pn = 0.5,
// where every PMF entry is a binomial coefficient over 2^n and the reference is exact. The
// reference executes the loop with the same operation order as the PE. The probabilities are
// offered from a small queue that sometimes runs empty. Timing: while probabilities are
// available, consecutive trials start exactly K + 1 + 30 cycles apart.
module tb_pbd_pe;
  import posit_ref_pkg::*;

  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n = 1'b0;
  int checks = 0, failures = 0;

  // ---- posit(16,2) instance ----
  localparam int N1 = 16, ES1 = 2, KMAX1 = 16;
  logic           s1_start = 0, s1_inv = 0, s1_pop, s1_busy, s1_done;
  logic [31:0]    s1_nt = 0;
  logic [4:0]     s1_k = 0;
  logic [N1-1:0]  s1_in = 0, s1_pv;

  pbd_pe #(.N(N1), .ES(ES1), .KMAX(KMAX1)) dut16 (
    .clk(clk), .rst_n(rst_n), .start(s1_start), .num_trials(s1_nt), .k_obs(s1_k),
    .in_valid(s1_inv), .in_data(s1_in), .in_pop(s1_pop), .busy(s1_busy), .done(s1_done),
    .pvalue(s1_pv)
  );

  // ---- posit(64,12) instance ----
  logic           s2_start = 0, s2_inv = 0, s2_pop, s2_busy, s2_done;
  logic [31:0]    s2_nt = 0;
  logic [12:0]    s2_k = 0;
  logic [63:0]    s2_in = 0, s2_pv;

  pbd_pe dut64 (
    .clk(clk), .rst_n(rst_n), .start(s2_start), .num_trials(s2_nt), .k_obs(s2_k),
    .in_valid(s2_inv), .in_data(s2_in), .in_pop(s2_pop), .busy(s2_busy), .done(s2_done),
    .pvalue(s2_pv)
  );

  function automatic logic [63:0] ref_pvalue(logic [63:0] probs [], int K, int n, int es);
    logic [63:0] pr [], pn, omp, one, pv, nw [];
    one = 64'd1 << (n - 2);
    pr = new[K + 1];
    nw = new[K + 1];
    foreach (pr[i]) pr[i] = (i == 0) ? one : 0;
    pv = 0;
    for (int t = 1; t <= probs.size(); t++) begin
      pn = probs[t-1];
      omp = add(one, (-pn) & ((n == 64) ? '1 : ((64'd1 << n) - 1)), n, es);
      for (int k = 0; k <= K; k++)
        nw[k] = add(mul(pr[k], omp, n, es), (k == 0) ? 64'd0 : mul(pr[k-1], pn, n, es), n, es);
      if (t > K) pv = add(pv, mul(pr[K-1], pn, n, es), n, es);
      pr = nw;
    end
    return pv;
  endfunction

  // trial start times of the 16-bit PE
  int cyc = 0;
  int starts [$];
  always @(posedge clk) if (rst_n) begin
    cyc++;
    if (dut16.iss_valid && dut16.k == 0) starts.push_back(cyc);
  end

  task automatic run16(int K, int NT, bit gaps);
    logic [63:0] probs [];
    logic [63:0] expv;
    int i;
    probs = new[NT];
    foreach (probs[j]) probs[j] = 64'($urandom_range((1 << (N1 - 2)) - 1, 1));
    expv = ref_pvalue(probs, K, N1, ES1);
    starts.delete();
    @(negedge clk);
    s1_nt = NT; s1_k = 5'(K); s1_start = 1;
    @(negedge clk);
    s1_start = 0;
    i = 0;
    while (!s1_done) begin
      // offer the next probability (sometimes late when gaps are enabled)
      s1_inv = (i < NT) && !(gaps && $urandom_range(3) == 0);
      s1_in  = (i < NT) ? probs[i][N1-1:0] : '0;
      @(posedge clk);
      if (s1_inv && s1_pop) i++;
      @(negedge clk);
    end
    s1_inv = 0;
    checks++;
    if (s1_pv !== expv[N1-1:0]) begin
      failures++;
      $display("p16 K=%0d NT=%0d pvalue %h expected %h", K, NT, s1_pv, expv[N1-1:0]);
    end
    if (!gaps)
      for (int j = 1; j < starts.size(); j++) begin
        checks++;
        if (starts[j] - starts[j-1] != K + 1 + 30) begin
          failures++;
          $display("trial gap %0d, expected %0d", starts[j] - starts[j-1], K + 1 + 30);
        end
      end
  endtask

  task automatic run64(int K, int NT);
    logic [63:0] probs [];
    logic [63:0] expv;
    int i;
    probs = new[NT];
    foreach (probs[j]) probs[j] = 64'h3FFE_0000_0000_0000;   // 0.5 in posit(64,12)
    expv = ref_pvalue(probs, K, 64, 12);
    @(negedge clk);
    s2_nt = NT; s2_k = 13'(K); s2_start = 1;
    @(negedge clk);
    s2_start = 0;
    i = 0;
    while (!s2_done) begin
      s2_inv = (i < NT);
      s2_in  = probs[0];
      @(posedge clk);
      if (s2_inv && s2_pop) i++;
      @(negedge clk);
    end
    s2_inv = 0;
    checks++;
    if (s2_pv !== expv) begin
      failures++;
      $display("p64 K=%0d NT=%0d pvalue %h expected %h", K, NT, s2_pv, expv);
    end
    checks++;
    if (p64_to_real(s2_pv) <= 0.0) begin
      failures++;
      $display("p64 K=%0d NT=%0d pvalue %h is not positive", K, NT, s2_pv);
    end
  endtask

  function automatic real p64_to_real(logic [63:0] p);
    pval_t v;
    v = decode(p, 64, 12);
    return v.zero ? 0.0 : v.sig * (2.0 ** v.scale);
  endfunction

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    // 0.5 = 0_01_111111111111_0...: regime k = -1, exponent 4095
    checks++;
    if (encode(0, -1, 1.0, 64, 12) != 64'h3FFE_0000_0000_0000) failures++;
    run16(3, 12, 0);
    run16(5, 20, 1);
    run16(1, 9, 0);
    run16(4, 4, 1);      // NT <= K: p-value stays 0
    run16(16, 25, 0);    // K = KMAX
    run64(5, 30);
    run64(2, 12);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
