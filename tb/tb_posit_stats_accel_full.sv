// tb_posit_stats_accel_full: the top level at its default sizes, one complete job per unit.
//
// Forward-algorithm unit, posit(64,18), H = 64, 16 symbols, T = 4: the emission probabilities
// are about 2^-40000 each, so the likelihood ends near 2^-160000, far below the smallest
// binary64 (2^-1074) and only representable because of the posit's wide regime. The inputs are
// chosen so that every intermediate value stays exact in the reference model: initial alpha
// with 8-bit fractions at one scale, A[p][q] = 2^-6 * (1 + ((p+q) mod 4)/4), B[q][s] = 2^-(40000+s).
// Column unit, posit(64,12), 8 lanes, KMAX = 4096: each lane gets a column with pn = 0.5 or
// 0.25 (PMF values then stay exact in a double), K from 1 up to KMAX. Results are compared with
// the reference model running the same loops in the same order; the likelihood must also decode
// to a scale below -1074, and the unit's cycle count must match T * (H + PE latency) plus the
// fixed start and final-sum overhead.
module tb_posit_stats_accel_full;
  import posit_pkg::*;
  import posit_ref_pkg::*;

  localparam int N = 64, FES = 18, CES = 12, H = 64, NSYM = 16, NPE = 8, KMAX = 4096;
  localparam int CFG_W = 6, KW = 13, TAGW = 3, T = 4;
  localparam int PE_LAT = 24 + 8 * 6;

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
  logic [TAGW-1:0]  fm_tag_unused;

  logic [NPE-1:0]   cu_start = 0, cu_busy, cu_done;
  logic [31:0]      cu_nt [NPE];
  logic [KW-1:0]    cu_k [NPE];
  logic [31:0]      cu_base [NPE];
  logic [N-1:0]     cu_pv [NPE];
  logic             cm_rv, cm_rr, cm_pv;
  logic [31:0]      cm_ra;
  logic [TAGW-1:0]  cm_rt, cm_pt;
  logic [63:0]      cm_pd;

  posit_stats_accel dut (
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

  dram_model #(.TAGW(TAGW), .LATENCY(30), .STALL_PCT(0)) u_fdram (
    .clk(clk), .req_valid(fm_rv), .req_ready(fm_rr), .req_addr(fm_ra), .req_tag(3'd0),
    .resp_valid(fm_pv), .resp_data(fm_pd), .resp_tag(fm_tag_unused)
  );
  dram_model #(.TAGW(TAGW), .LATENCY(25), .STALL_PCT(30)) u_cdram (
    .clk(clk), .req_valid(cm_rv), .req_ready(cm_rr), .req_addr(cm_ra), .req_tag(cm_rt),
    .resp_valid(cm_pv), .resp_data(cm_pd), .resp_tag(cm_pt)
  );

  logic [N-1:0] A [H][H];
  logic [N-1:0] B [H][NSYM];
  logic [N-1:0] alpha [H];
  int           obs [T];

  function automatic logic [N-1:0] tree_sum(logic [N-1:0] v [H]);
    logic [N-1:0] lvl [H];
    int w;
    lvl = v;
    w = H;
    while (w > 1) begin
      for (int i = 0; i < w / 2; i++) lvl[i] = add(lvl[2*i], lvl[2*i+1], N, FES);
      w = w / 2;
    end
    return lvl[0];
  endfunction

  function automatic logic [N-1:0] ref_likelihood();
    logic [N-1:0] ap [H], an [H], tm [H];
    ap = alpha;
    for (int t = 0; t < T; t++) begin
      for (int q = 0; q < H; q++) begin
        for (int p = 0; p < H; p++) tm[p] = mul(ap[p], A[p][q], N, FES);
        an[q] = mul(tree_sum(tm), B[q][obs[t]], N, FES);
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
      omp = add(one, -pn, N, CES);
      for (int k = 0; k <= K; k++)
        nw[k] = add(mul(pr[k], omp, N, CES), (k == 0) ? 64'd0 : mul(pr[k-1], pn, N, CES), N, CES);
      if (t > K) p = add(p, mul(pr[K-1], pn, N, CES), N, CES);
      pr = nw;
    end
    return p;
  endfunction

  task automatic cfg_write(fau_cfg_e sel, int row, int col, logic [N-1:0] d);
    @(negedge clk);
    cfg_we = 1; cfg_sel = sel; cfg_row = CFG_W'(row); cfg_col = CFG_W'(col); cfg_data = d;
    @(negedge clk);
    cfg_we = 0;
  endtask

  logic [N-1:0]   exp_lik;
  logic [N-1:0]   exp_pv [NPE];
  logic [NPE-1:0] seen = '0;
  always @(posedge clk) if (rst_n) seen <= (seen | cu_done) & ~cu_start;
  bit fau_finished = 0;
  always @(posedge clk) if (rst_n && fau_done) fau_finished <= 1;

  // lane configurations: K, NT, pn exponent (pn = 2^-e)
  int lane_k  [NPE] = '{1, 3, 5, 8, 12, 20, 17, KMAX};
  int lane_nt [NPE] = '{30, 40, 24, 40, 20, 40, 24, 3};
  int lane_e  [NPE] = '{1, 1, 2, 1, 2, 1, 2, 1};

  initial begin
    pval_t v;
    for (int l = 0; l < NPE; l++) begin cu_nt[l] = 0; cu_k[l] = 0; cu_base[l] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    // ---- HMM inputs ----
    for (int p = 0; p < H; p++)
      for (int q = 0; q < H; q++) begin
        A[p][q] = encode(0, -6, 1.0 + real'((p + q) % 4) / 4.0, N, FES);
        cfg_write(CFG_A, p, q, A[p][q]);
      end
    for (int q = 0; q < H; q++)
      for (int s = 0; s < NSYM; s++) begin
        B[q][s] = encode(0, -(40000 + s), 1.0, N, FES);
        cfg_write(CFG_B, q, s, B[q][s]);
      end
    for (int p = 0; p < H; p++) begin
      alpha[p] = encode(0, -7, 1.0 + real'($urandom_range(255)) / 256.0, N, FES);
      cfg_write(CFG_ALPHA, p, 0, alpha[p]);
    end
    for (int t = 0; t < T; t++) begin
      obs[t] = $urandom_range(NSYM - 1);
      u_fdram.poke(500 + t, 64'(obs[t]));
    end
    exp_lik = ref_likelihood();
    // ---- columns ----
    for (int l = 0; l < NPE; l++) begin
      logic [63:0] probs [];
      probs = new[lane_nt[l]];
      cu_base[l] = 32'(l * 64);
      foreach (probs[j]) begin
        probs[j] = encode(0, -lane_e[l], 1.0, N, CES);
        u_cdram.poke(cu_base[l] + j, probs[j]);
      end
      cu_nt[l] = lane_nt[l];
      cu_k[l]  = KW'(lane_k[l]);
      exp_pv[l] = ref_pvalue(probs, lane_k[l]);
    end
    // ---- run both units ----
    @(negedge clk);
    fau_steps = T; fau_base = 500; fau_start = 1; cu_start = '1;
    @(negedge clk);
    fau_start = 0; cu_start = '0;
    while (!(fau_finished && seen == '1)) @(posedge clk);
    #1;
    checks++;
    if (fau_lik !== exp_lik) begin
      failures++;
      $display("likelihood %h expected %h", fau_lik, exp_lik);
    end
    v = decode(fau_lik, N, FES);
    $display("likelihood = %f * 2^%0d", v.sig, v.scale);
    checks++;
    if (v.zero || v.scale >= -1074) begin
      failures++;
      $display("likelihood is not below the binary64 range");
    end
    // first observation arrives after the DRAM latency; afterwards T * (H + PE_LAT) cycles,
    // then one cycle to issue the final sum and PE_LAT to get it
    checks++;
    if (fau_cycles < T * (H + PE_LAT) + PE_LAT + 1 || fau_cycles > T * (H + PE_LAT) + PE_LAT + 40) begin
      failures++;
      $display("forward algorithm took %0d cycles", fau_cycles);
    end
    $display("forward algorithm: %0d cycles for T=%0d, H=%0d", fau_cycles, T, H);
    for (int l = 0; l < NPE; l++) begin
      checks++;
      v = decode(cu_pv[l], N, CES);
      $display("column %0d: K=%0d NT=%0d p-value %h (%f * 2^%0d)", l, lane_k[l], lane_nt[l],
               cu_pv[l], v.sig, v.scale);
      if (cu_pv[l] !== exp_pv[l]) begin
        failures++;
        $display("column %0d pvalue %h expected %h", l, cu_pv[l], exp_pv[l]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
