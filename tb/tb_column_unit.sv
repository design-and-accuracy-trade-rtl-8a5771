// tb_column_unit: eight columns processed at once by the eight lanes of the column unit.
//
// Built with posit(16,2) and KMAX = 16 so the reference model is exact and the run is short.
// Every lane gets its own column (random K in 1..16, NT in 1..40, random probabilities) stored
// at its own DRAM address range; all lanes start together, so their prefetchers compete for the
// one read port. Each p-value is compared with the LoFreq loop run in the reference model. A
// second round restarts the lanes at different times. The testbench also counts cycles on which
// more than one lane requested memory, to show that the arbiter was exercised.
module tb_column_unit;
  import posit_ref_pkg::*;

  localparam int N = 16, ES = 2, NPE = 8, KMAX = 16, KW = 5;

  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n = 1'b0;
  int checks = 0, failures = 0;

  logic [NPE-1:0] start = '0, busy, done;
  logic [31:0]    nt [NPE];
  logic [KW-1:0]  kk [NPE];
  logic [31:0]    base [NPE];
  logic [N-1:0]   pv [NPE];
  logic           mreq_v, mreq_r, mresp_v;
  logic [31:0]    mreq_a;
  logic [2:0]     mreq_t, mresp_t;
  logic [63:0]    mresp_d;

  column_unit #(.N(N), .ES(ES), .NPE(NPE), .KMAX(KMAX)) dut (
    .clk(clk), .rst_n(rst_n), .start(start), .num_trials(nt), .k_obs(kk), .base(base),
    .busy(busy), .done(done), .pvalue(pv),
    .mem_req_valid(mreq_v), .mem_req_ready(mreq_r), .mem_req_addr(mreq_a), .mem_req_tag(mreq_t),
    .mem_resp_valid(mresp_v), .mem_resp_data(mresp_d), .mem_resp_tag(mresp_t)
  );

  dram_model #(.TAGW(3), .LATENCY(12), .STALL_PCT(25)) u_dram (
    .clk(clk), .req_valid(mreq_v), .req_ready(mreq_r), .req_addr(mreq_a), .req_tag(mreq_t),
    .resp_valid(mresp_v), .resp_data(mresp_d), .resp_tag(mresp_t)
  );

  function automatic logic [63:0] ref_pvalue(logic [63:0] probs [], int K, int n, int es);
    logic [63:0] pr [], pn, omp, one, p, nw [];
    one = 64'd1 << (n - 2);
    pr = new[K + 1];
    nw = new[K + 1];
    foreach (pr[i]) pr[i] = (i == 0) ? one : 0;
    p = 0;
    for (int t = 1; t <= probs.size(); t++) begin
      pn = probs[t-1];
      omp = add(one, (-pn) & ((64'd1 << n) - 1), n, es);
      for (int k = 0; k <= K; k++)
        nw[k] = add(mul(pr[k], omp, n, es), (k == 0) ? 64'd0 : mul(pr[k-1], pn, n, es), n, es);
      if (t > K) p = add(p, mul(pr[K-1], pn, n, es), n, es);
      pr = nw;
    end
    return p;
  endfunction

  logic [N-1:0] expv [NPE];
  int contention = 0;
  always @(posedge clk) if (rst_n && $countones(dut.req_v) > 1) contention++;

  task automatic setup_lane(int l, int round);
    logic [63:0] probs [];
    int K, T;
    K = $urandom_range(KMAX, 1);
    T = $urandom_range(40, 1);
    probs = new[T];
    base[l] = 32'(l * 64 + round * 1024);
    foreach (probs[j]) begin
      probs[j] = 64'($urandom_range((1 << (N - 2)) - 1, 1));
      u_dram.poke(base[l] + j, probs[j]);
    end
    nt[l] = T;
    kk[l] = KW'(K);
    expv[l] = N'(ref_pvalue(probs, K, N, ES));
  endtask

  // done pulses are collected here; a lane's p-value stays valid until it is restarted
  logic [NPE-1:0] seen = '0;
  always @(posedge clk) if (rst_n) seen <= (seen | done) & ~start;

  task automatic wait_all();
    while (seen != '1) @(posedge clk);
    #1;
    for (int l = 0; l < NPE; l++) begin
      checks++;
      if (pv[l] !== expv[l]) begin
        failures++;
        $display("lane %0d K=%0d NT=%0d pvalue %h expected %h", l, kk[l], nt[l], pv[l], expv[l]);
      end
    end
  endtask

  initial begin
    for (int l = 0; l < NPE; l++) begin nt[l] = 0; kk[l] = 0; base[l] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    // round 1: all lanes start together
    for (int l = 0; l < NPE; l++) setup_lane(l, 0);
    @(negedge clk);
    start = '1;
    @(negedge clk);
    start = '0;
    wait_all();
    // round 2: staggered starts
    for (int l = 0; l < NPE; l++) setup_lane(l, 1);
    for (int l = 0; l < NPE; l++) begin
      @(negedge clk);
      start = NPE'(1) << l;
      @(negedge clk);
      start = '0;
      repeat ($urandom_range(20)) @(negedge clk);
    end
    wait_all();
    checks++;
    if (contention == 0) begin
      failures++;
      $display("lanes never competed for the memory port");
    end
    $display("memory contention cycles: %0d", contention);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
