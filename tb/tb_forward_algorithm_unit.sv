// tb_forward_algorithm_unit: runs the forward algorithm on a small HMM and checks the likelihood.
//
// The unit is built with H = 5 states (not a power of two, so the reduction tree pads), 4
// symbols and posit(16,2), whose arithmetic the reference model reproduces exactly. A, B and the
// initial alpha are random posits in (0,1); O is random. The reference runs the same loop in
// the same summation order as the hardware: terms, pairwise tree sums with zero padding, then
// the emission product, and at the end the same tree over alpha. Three runs are made, the
// last with T = 0 (likelihood = sum of the loaded alpha). Timing checks: consecutive outer
// iterations start exactly H + PE latency cycles apart once the observations are prefetched,
// and every state is issued on consecutive cycles.
module tb_forward_algorithm_unit;
  import posit_pkg::*;
  import posit_ref_pkg::*;

  localparam int N = 16, ES = 2, H = 5, NSYM = 4;
  localparam int PE_LAT = 24 + 8 * $clog2(H);
  localparam int IDX_W = $clog2(H), CFG_W = 3;

  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n = 1'b0;

  int checks = 0, failures = 0;

  logic             cfg_we = 1'b0;
  fau_cfg_e         cfg_sel = CFG_A;
  logic [CFG_W-1:0] cfg_row = '0, cfg_col = '0;
  logic [N-1:0]     cfg_data = '0;
  logic             start = 1'b0;
  logic [31:0]      num_steps = '0, obs_base = '0;
  logic             busy, done;
  logic [N-1:0]     likelihood;
  logic [31:0]      cycles;
  logic             mreq_v, mreq_r, mresp_v;
  logic [31:0]      mreq_a;
  logic [63:0]      mresp_d;
  logic [3:0]       mresp_tag;

  forward_algorithm_unit #(.N(N), .ES(ES), .H(H), .NSYM(NSYM)) dut (
    .clk(clk), .rst_n(rst_n), .cfg_we(cfg_we), .cfg_sel(cfg_sel), .cfg_row(cfg_row),
    .cfg_col(cfg_col), .cfg_data(cfg_data), .start(start), .num_steps(num_steps),
    .obs_base(obs_base), .busy(busy), .done(done), .likelihood(likelihood), .cycles(cycles),
    .mem_req_valid(mreq_v), .mem_req_ready(mreq_r), .mem_req_addr(mreq_a),
    .mem_resp_valid(mresp_v), .mem_resp_data(mresp_d)
  );

  dram_model #(.LATENCY(15), .STALL_PCT(30)) u_dram (
    .clk(clk), .req_valid(mreq_v), .req_ready(mreq_r), .req_addr(mreq_a), .req_tag(4'd0),
    .resp_valid(mresp_v), .resp_data(mresp_d), .resp_tag(mresp_tag)
  );

  logic [N-1:0] A [H][H];
  logic [N-1:0] B [H][NSYM];
  logic [N-1:0] alpha [H];
  int           obs [64];

  // random probability in (0,1): positive posit below 1.0
  function automatic logic [N-1:0] rand_prob();
    logic [N-1:0] p;
    p = N'($urandom_range((1 << (N - 2)) - 1, 1));
    return p;
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

  function automatic logic [N-1:0] ref_likelihood(int T);
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

  task automatic cfg_write(fau_cfg_e sel, int row, int col, logic [N-1:0] d);
    @(negedge clk);
    cfg_we = 1'b1; cfg_sel = sel; cfg_row = CFG_W'(row); cfg_col = CFG_W'(col); cfg_data = d;
    @(negedge clk);
    cfg_we = 1'b0;
  endtask

  // timing monitor: cycle of each q = 0 issue
  int issue_cyc [$];
  int cyc = 0;
  int run_in = 0;
  always @(posedge clk) if (rst_n) begin
    cyc++;
    if (dut.pe_in_valid && !dut.sum_mode && dut.q == 0) issue_cyc.push_back(cyc);
    if (dut.pe_in_valid && !dut.sum_mode) run_in++;
  end

  task automatic run(int T, int base);
    logic [N-1:0] expv;
    int t0;
    for (int t = 0; t < T; t++) begin
      obs[t] = $urandom_range(NSYM - 1);
      u_dram.poke(base + t, 64'(obs[t]));
    end
    expv = ref_likelihood(T);
    issue_cyc.delete();
    run_in = 0;
    num_steps <= T; obs_base <= base; start <= 1'b1;
    @(posedge clk);
    start <= 1'b0;
    t0 = cyc;
    while (!done) @(posedge clk);
    #1;
    checks++;
    if (likelihood !== expv) begin
      failures++;
      $display("T=%0d likelihood %h expected %h", T, likelihood, expv);
    end
    checks++;
    if (run_in != T * H) begin
      failures++;
      $display("issued %0d states, expected %0d", run_in, T * H);
    end
    // outer iterations after the first few (prefetch filled) start H + PE_LAT apart
    for (int i = 2; i < issue_cyc.size(); i++) begin
      checks++;
      if (issue_cyc[i] - issue_cyc[i-1] != H + PE_LAT) begin
        failures++;
        $display("iteration %0d started %0d cycles after the previous, expected %0d",
                 i, issue_cyc[i] - issue_cyc[i-1], H + PE_LAT);
      end
    end
    repeat (3) @(posedge clk);
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    for (int p = 0; p < H; p++)
      for (int q = 0; q < H; q++) begin
        A[p][q] = rand_prob();
        cfg_write(CFG_A, p, q, A[p][q]);
      end
    for (int q = 0; q < H; q++)
      for (int s = 0; s < NSYM; s++) begin
        B[q][s] = rand_prob();
        cfg_write(CFG_B, q, s, B[q][s]);
      end
    for (int p = 0; p < H; p++) begin
      alpha[p] = rand_prob();
      cfg_write(CFG_ALPHA, p, 0, alpha[p]);
    end
    run(12, 100);
    // reload alpha and run again with another sequence
    for (int p = 0; p < H; p++) begin
      alpha[p] = rand_prob();
      cfg_write(CFG_ALPHA, p, 0, alpha[p]);
    end
    run(7, 300);
    for (int p = 0; p < H; p++) begin
      alpha[p] = rand_prob();
      cfg_write(CFG_ALPHA, p, 0, alpha[p]);
    end
    run(0, 0);
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

