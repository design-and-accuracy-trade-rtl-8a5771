// tb_posit_stats_accel: end-to-end run of both accelerators through the top level.
//
// Reduced build: posit(16,2) in both units (the reference model is exact for it), H = 5 states,
// 4 symbols, 3 column-unit lanes with KMAX = 16. The forward-algorithm unit runs an HMM of
// T = 24 steps (more than the prefetch FIFO holds) while the column unit processes three columns at the same time, each unit on its
// own DRAM model. Results are compared with the reference model running the same loops in the
// same operation order. Halfway through the HMM run the forward-algorithm unit's DRAM is blocked
// for a while, so the unit must wait for an observation between outer iterations.
// The testbench counts how often each mechanism occurred and fails if one never did:
//   state issues into the pipelined PE, waits for a prefetched observation after the first
//   iteration, the reuse of the PE for the final likelihood sum, column-unit lanes competing
//   for the memory port, a column PE waiting for its next probability, and p-value terms.
module tb_posit_stats_accel;
  import posit_pkg::*;
  import posit_ref_pkg::*;

  localparam int N = 16, ES = 2, H = 5, NSYM = 4, NPE = 3, KMAX = 16;
  localparam int CFG_W = 3, KW = 5, TAGW = 2, T = 24;

  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n = 1'b0;
  int checks = 0, failures = 0;

  logic             cfg_we = 0;
  fau_cfg_e         cfg_sel = CFG_A;
  logic [CFG_W-1:0] cfg_row = 0, cfg_col = 0;
  logic [N-1:0]     cfg_data = 0;
  logic             fau_start = 0, fau_busy, fau_done;
  logic [31:0]      fau_steps = 0, fau_base = 0, fau_cycles;
  logic [N-1:0]     fau_lik;
  logic             fm_rv, fm_rr, fm_pv;
  logic [31:0]      fm_ra;
  logic [63:0]      fm_pd;
  logic [1:0]       fm_tag_unused;

  logic [NPE-1:0]   cu_start = 0, cu_busy, cu_done;
  logic [31:0]      cu_nt [NPE];
  logic [KW-1:0]    cu_k [NPE];
  logic [31:0]      cu_base [NPE];
  logic [N-1:0]     cu_pv [NPE];
  logic             cm_rv, cm_rr, cm_pv;
  logic [31:0]      cm_ra;
  logic [TAGW-1:0]  cm_rt, cm_pt;
  logic [63:0]      cm_pd;

  posit_stats_accel #(.N(N), .FAU_ES_P(ES), .CU_ES_P(ES), .H(H), .NSYM(NSYM), .NPE(NPE),
                      .KMAX(KMAX)) dut (
    .clk(clk), .rst_n(rst_n),
    .fau_cfg_we(cfg_we), .fau_cfg_sel(cfg_sel), .fau_cfg_row(cfg_row), .fau_cfg_col(cfg_col),
    .fau_cfg_data(cfg_data), .fau_start(fau_start), .fau_num_steps(fau_steps),
    .fau_obs_base(fau_base), .fau_busy(fau_busy), .fau_done(fau_done),
    .fau_likelihood(fau_lik), .fau_cycles(fau_cycles),
    .fau_mem_req_valid(fm_rv), .fau_mem_req_ready(fm_rr), .fau_mem_req_addr(fm_ra),
    .fau_mem_resp_valid(fm_pv), .fau_mem_resp_data(fm_pd),
    .cu_start(cu_start), .cu_num_trials(cu_nt), .cu_k_obs(cu_k), .cu_base(cu_base),
    .cu_busy(cu_busy), .cu_done(cu_done), .cu_pvalue(cu_pv),
    .cu_mem_req_valid(cm_rv), .cu_mem_req_ready(cm_rr), .cu_mem_req_addr(cm_ra),
    .cu_mem_req_tag(cm_rt), .cu_mem_resp_valid(cm_pv), .cu_mem_resp_data(cm_pd),
    .cu_mem_resp_tag(cm_pt)
  );

  dram_model #(.TAGW(2), .LATENCY(30), .STALL_PCT(20)) u_fdram (
    .clk(clk), .req_valid(fm_rv), .req_ready(fm_rr), .req_addr(fm_ra), .req_tag(2'd0),
    .resp_valid(fm_pv), .resp_data(fm_pd), .resp_tag(fm_tag_unused)
  );
  dram_model #(.TAGW(TAGW), .LATENCY(25), .STALL_PCT(40)) u_cdram (
    .clk(clk), .req_valid(cm_rv), .req_ready(cm_rr), .req_addr(cm_ra), .req_tag(cm_rt),
    .resp_valid(cm_pv), .resp_data(cm_pd), .resp_tag(cm_pt)
  );

  // ---------------- reference models ----------------
  logic [N-1:0] A [H][H];
  logic [N-1:0] B [H][NSYM];
  logic [N-1:0] alpha [H];
  int           obs [T];

  function automatic logic [N-1:0] rand_prob();
    return N'($urandom_range((1 << (N - 2)) - 1, 1));
  endfunction

  function automatic logic [N-1:0] tree_sum(logic [N-1:0] v [H]);
    logic [N-1:0] lvl [8];
    int w;
    w = 1 << $clog2(H);
    for (int i = 0; i < 8; i++) lvl[i] = (i < H) ? v[i] : '0;
    while (w > 1) begin
      for (int i = 0; i < w / 2; i++) lvl[i] = N'(add(lvl[2*i], lvl[2*i+1], N, ES));
      w = w / 2;
    end
    return lvl[0];
  endfunction

  function automatic logic [N-1:0] ref_likelihood();
    logic [N-1:0] ap [H], an [H], tm [H];
    ap = alpha;
    for (int t = 0; t < T; t++) begin
      for (int q = 0; q < H; q++) begin
        for (int p = 0; p < H; p++) tm[p] = N'(mul(ap[p], A[p][q], N, ES));
        an[q] = N'(mul(tree_sum(tm), B[q][obs[t]], N, ES));
      end
      ap = an;
    end
    return tree_sum(ap);
  endfunction

  function automatic logic [63:0] ref_pvalue(logic [63:0] probs [], int K);
    logic [63:0] pr [], pn, omp, one, p, nw [];
    one = 64'd1 << (N - 2);
    pr = new[K + 1];
    nw = new[K + 1];
    foreach (pr[i]) pr[i] = (i == 0) ? one : 0;
    p = 0;
    for (int t = 1; t <= probs.size(); t++) begin
      pn = probs[t-1];
      omp = add(one, (-pn) & ((64'd1 << N) - 1), N, ES);
      for (int k = 0; k <= K; k++)
        nw[k] = add(mul(pr[k], omp, N, ES), (k == 0) ? 64'd0 : mul(pr[k-1], pn, N, ES), N, ES);
      if (t > K) p = add(p, mul(pr[K-1], pn, N, ES), N, ES);
      pr = nw;
    end
    return p;
  endfunction

  // ---------------- mechanism counters ----------------
  int n_issue = 0, n_obs_wait = 0, n_sum = 0, n_contention = 0, n_prob_wait = 0, n_pv_term = 0;
  int iter_done = 0;
  always @(posedge clk) if (rst_n) begin
    if (dut.u_fau.pe_in_valid && !dut.u_fau.sum_mode) n_issue++;
    if (dut.u_fau.last_result) iter_done++;
    if (int'(dut.u_fau.state) == 1 && iter_done > 0) n_obs_wait++;       // S_WAIT
    if (dut.u_fau.sum_mode) n_sum++;
    if ($countones(dut.u_cu.req_v) > 1) n_contention++;
  end
  for (genvar l = 0; l < NPE; l++) begin : g_mon
    always @(posedge clk) if (rst_n) begin
      if (int'(dut.u_cu.g_lane[l].u_pe.state) == 2) n_prob_wait++;        // S_WAIT
      if (dut.u_cu.g_lane[l].u_pe.tap) n_pv_term++;
    end
  end

  task automatic cfg_write(fau_cfg_e sel, int row, int col, logic [N-1:0] d);
    @(negedge clk);
    cfg_we = 1; cfg_sel = sel; cfg_row = CFG_W'(row); cfg_col = CFG_W'(col); cfg_data = d;
    @(negedge clk);
    cfg_we = 0;
  endtask

  logic [N-1:0] exp_lik;
  logic [N-1:0] exp_pv [NPE];
  logic [NPE-1:0] seen = '0;
  always @(posedge clk) if (rst_n) seen <= (seen | cu_done) & ~cu_start;
  bit fau_finished = 0;
  always @(posedge clk) if (rst_n && fau_done) fau_finished <= 1;

  initial begin
    for (int l = 0; l < NPE; l++) begin cu_nt[l] = 0; cu_k[l] = 0; cu_base[l] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    // HMM
    for (int p = 0; p < H; p++)
      for (int q = 0; q < H; q++) begin A[p][q] = rand_prob(); cfg_write(CFG_A, p, q, A[p][q]); end
    for (int q = 0; q < H; q++)
      for (int s = 0; s < NSYM; s++) begin B[q][s] = rand_prob(); cfg_write(CFG_B, q, s, B[q][s]); end
    for (int p = 0; p < H; p++) begin alpha[p] = rand_prob(); cfg_write(CFG_ALPHA, p, 0, alpha[p]); end
    for (int t = 0; t < T; t++) begin
      obs[t] = $urandom_range(NSYM - 1);
      u_fdram.poke(200 + t, 64'(obs[t]));
    end
    exp_lik = ref_likelihood();
    // columns
    for (int l = 0; l < NPE; l++) begin
      logic [63:0] probs [];
      int K, NT;
      K  = (l == 0) ? KMAX : $urandom_range(6, 1);
      NT = (l == 2) ? 1 : $urandom_range(30, 10);
      probs = new[NT];
      cu_base[l] = 32'(l * 100);
      foreach (probs[j]) begin
        probs[j] = 64'(rand_prob());
        u_cdram.poke(cu_base[l] + j, probs[j]);
      end
      cu_nt[l] = NT;
      cu_k[l]  = KW'(K);
      exp_pv[l] = N'(ref_pvalue(probs, K));
    end
    // block the HMM's DRAM before the start so that the prefetcher holds only a few words
    @(negedge clk);
    fau_steps = T; fau_base = 200; fau_start = 1; cu_start = '1;
    @(negedge clk);
    fau_start = 0; cu_start = '0;
    repeat (20) @(posedge clk);
    u_fdram.block = 1;
    repeat (1500) @(posedge clk);
    u_fdram.block = 0;
    while (!(fau_finished && seen == '1)) @(posedge clk);
    #1;
    checks++;
    if (fau_lik !== exp_lik) begin
      failures++;
      $display("likelihood %h expected %h", fau_lik, exp_lik);
    end
    for (int l = 0; l < NPE; l++) begin
      checks++;
      if (cu_pv[l] !== exp_pv[l]) begin
        failures++;
        $display("column %0d pvalue %h expected %h", l, cu_pv[l], exp_pv[l]);
      end
    end
    $display("mechanisms: issues=%0d observation waits=%0d final sums=%0d port contention=%0d probability waits=%0d p-value terms=%0d",
             n_issue, n_obs_wait, n_sum, n_contention, n_prob_wait, n_pv_term);
    checks += 6;
    if (n_issue != T * H) failures++;
    if (n_obs_wait == 0) failures++;
    if (n_sum != 1) failures++;
    if (n_contention == 0) failures++;
    if (n_prob_wait == 0) failures++;
    if (n_pv_term == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
