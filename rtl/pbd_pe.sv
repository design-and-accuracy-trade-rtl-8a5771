// pbd_pe: processing element of the LoFreq column unit (Poisson binomial PMF and p-value).
//
// It runs the column loop of LoFreq on one column in posit(64,12):
//   for n = 1..NT:  pn = success_prob[n]
//                   pr[k] = pr_prev[k] * (1 - pn) + pr_prev[k-1] * pn     for k = 0..K
//                   if n > K: pvalue += pr_prev[K-1] * pn
// with pr_prev[-1] = 0, pr[0] = 1 and all other pr = 0 before the first trial, and pvalue = 0.
// For k = 0 the formula reduces to pr_prev[0] * (1 - pn) exactly (0 * pn = 0, x + 0 = x).
// The inner loop is pipelined: one k enters per cycle, two multipliers (12 cycles) feed one
// adder (8 cycles). The published posit PE has a latency of 30 cycles without saying how they
// are spent, so the adder output passes PAD = PE_LAT - 20 = 10 further registers before it is
// written back; an outer iteration then takes K + 1 + PE_LAT cycles. pr lives
// in one array of KMAX+1 posits that is updated in place: pr[k] is written PE_LAT cycles after
// pr_prev[k] was read and the next outer iteration only starts after the last write, so no read
// ever sees a new value early. pr_prev[k-1] is the word read one cycle earlier. The product
// pr_prev[K-1] * pn is already formed by the second multiplier for k = K; it is tapped there and
// a third adder accumulates the p-value. 1 - pn (an adder fed with 1.0 and -pn) is computed for
// the next trial while the current one runs. The paper gives the loop, the posit format and that
// the PE is fully pipelined; the memory organisation, the tap and the in-place update are this
// design's own. K must be at least 1.
//
// Interface: pulse start with num_trials = NT and k_obs = K; success probabilities arrive from a
// prefetcher (in_valid/in_data, taken with in_pop). done pulses with pvalue valid; busy is high
// in between.
module pbd_pe #(
  parameter int unsigned N       = posit_pkg::POSIT_N,
  parameter int unsigned ES      = posit_pkg::CU_ES,
  parameter int unsigned KMAX    = 4096,
  parameter int unsigned TW      = 32,
  parameter int unsigned MUL_LAT = posit_pkg::MUL_LAT,
  parameter int unsigned ADD_LAT = posit_pkg::ADD_LAT,
  parameter int unsigned PE_LAT  = 30,
  localparam int unsigned KW     = $clog2(KMAX + 1),
  localparam int unsigned PAD    = PE_LAT - MUL_LAT - ADD_LAT
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [TW-1:0] num_trials,
  input  logic [KW-1:0] k_obs,
  input  logic          in_valid,
  input  logic [N-1:0]  in_data,
  output logic          in_pop,
  output logic          busy,
  output logic          done,
  output logic [N-1:0]  pvalue
);

  localparam logic [N-1:0] ONE = N'(posit_pkg::posit_one(N));

  typedef enum logic [2:0] {S_IDLE, S_INIT, S_WAIT, S_ISSUE, S_DRAIN, S_FINISH} state_e;
  state_e state;

  logic [N-1:0]  pr_mem [KMAX + 1];
  logic [TW-1:0] n_cur;        // current trial, 1-based
  logic [TW-1:0] nt;
  logic [KW-1:0] kk;           // K of this column
  logic [KW-1:0] k;            // next index to issue

  // ---- next success probability and its complement ----
  logic          nxt_valid;    // pn_nxt holds a probability
  logic [N-1:0]  pn_nxt;
  logic [$clog2(ADD_LAT+1)-1:0] omp_wait;   // cycles until omp_nxt is valid
  logic [N-1:0]  omp_nxt;      // 1 - pn_nxt (adder output)
  logic [N-1:0]  pn, omp;      // values of the running trial
  logic          take;         // start a trial with the next probability

  posit_add #(.N(N), .ES(ES), .LAT(ADD_LAT)) u_sub (
    .clk(clk), .a(ONE), .b(~pn_nxt + 1'b1), .y(omp_nxt)
  );

  assign in_pop = in_valid && !nxt_valid && (state != S_IDLE) && (state != S_FINISH);

  // ---- datapath ----
  logic          iss_valid;
  logic [N-1:0]  rd_k, rd_km1;
  logic [N-1:0]  prod1, prod2, sum_raw, sum;
  logic [KW-1:0] idx_m, idx_a;     // index at the multiplier outputs / adder output
  logic          vld_m, vld_a;

  assign iss_valid = (state == S_ISSUE);
  assign rd_k      = pr_mem[k];

  posit_mul #(.N(N), .ES(ES), .LAT(MUL_LAT)) u_mul_stay (
    .clk(clk), .a(rd_k), .b(omp), .y(prod1)
  );
  posit_mul #(.N(N), .ES(ES), .LAT(MUL_LAT)) u_mul_succ (
    .clk(clk), .a((k == '0) ? '0 : rd_km1), .b(pn), .y(prod2)
  );
  posit_add #(.N(N), .ES(ES), .LAT(ADD_LAT)) u_add (
    .clk(clk), .a(prod1), .b(prod2), .y(sum_raw)
  );
  pipe_delay #(.W(N), .D(PAD)) u_pad (.clk(clk), .d(sum_raw), .q(sum));

  pipe_delay #(.W(KW), .D(MUL_LAT)) u_idx_m (.clk(clk), .d(k), .q(idx_m));
  pipe_delay #(.W(KW), .D(ADD_LAT + PAD)) u_idx_a (.clk(clk), .d(idx_m), .q(idx_a));

  logic [PE_LAT-1:0] vld;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) vld <= '0;
    else        vld <= {vld[PE_LAT-2:0], iss_valid};
  end
  assign vld_m = vld[MUL_LAT-1];
  assign vld_a = vld[PE_LAT-1];

  // ---- p-value accumulation ----
  logic          tap;
  logic [N-1:0]  pv_sum;
  logic [ADD_LAT-1:0] pv_busy;
  assign tap = vld_m && (idx_m == kk) && (n_cur > TW'(kk));

  posit_add #(.N(N), .ES(ES), .LAT(ADD_LAT)) u_pv (
    .clk(clk), .a(pvalue), .b(tap ? prod2 : '0), .y(pv_sum)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) pv_busy <= '0;
    else        pv_busy <= {pv_busy[ADD_LAT-2:0], tap};
  end

  // ---- control ----
  logic last_result;
  assign last_result = (state == S_DRAIN) && vld_a && (idx_a == kk);
  assign take = nxt_valid && (omp_wait == '0) &&
                ((state == S_WAIT) || (last_result && n_cur != nt));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      n_cur     <= '0;
      nt        <= '0;
      kk        <= '0;
      k         <= '0;
      nxt_valid <= 1'b0;
      pn_nxt    <= '0;
      omp_wait  <= '0;
      pn        <= '0;
      omp       <= '0;
      pvalue    <= '0;
      done      <= 1'b0;
    end else begin
      done <= 1'b0;
      // next-probability register
      if (in_pop) begin
        nxt_valid <= 1'b1;
        pn_nxt    <= in_data;
        omp_wait  <= ($clog2(ADD_LAT+1))'(ADD_LAT);
      end else if (take) begin
        nxt_valid <= 1'b0;
      end else if (omp_wait != '0) begin
        omp_wait <= omp_wait - 1'b1;
      end
      if (take) begin
        pn    <= pn_nxt;
        omp   <= omp_nxt;
        n_cur <= n_cur + 1'b1;
        k     <= '0;
      end
      // p-value register
      if (pv_busy[ADD_LAT-1]) pvalue <= pv_sum;

      case (state)
        S_IDLE: if (start) begin
          nt     <= num_trials;
          kk     <= k_obs;
          k      <= '0;
          n_cur  <= '0;
          pvalue <= '0;
          state  <= S_INIT;
        end
        S_INIT: begin                      // pr = {1, 0, 0, ...}
          k <= k + 1'b1;
          if (k == kk) state <= (nt == '0) ? S_FINISH : S_WAIT;
        end
        S_WAIT: if (take) state <= S_ISSUE;
        S_ISSUE: begin
          k <= k + 1'b1;
          if (k == kk) state <= S_DRAIN;
        end
        S_DRAIN: if (last_result) begin
          if (n_cur == nt) state <= S_FINISH;
          else if (take)   state <= S_ISSUE;
          else             state <= S_WAIT;
        end
        S_FINISH: if (pv_busy == '0) begin
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE);

  // pr_prev[k-1]: the word read in the previous issue cycle
  always_ff @(posedge clk) if (iss_valid) rd_km1 <= rd_k;

  always_ff @(posedge clk) begin
    if (state == S_INIT)
      pr_mem[k] <= (k == '0) ? ONE : '0;
    else if (vld_a && (state == S_ISSUE || state == S_DRAIN))
      pr_mem[idx_a] <= sum;
  end

  initial assert (PE_LAT >= MUL_LAT + ADD_LAT) else $error("pbd_pe needs PE_LAT >= MUL_LAT + ADD_LAT");

  // a result is never written to an index that is still to be read in this trial
  assert property (@(posedge clk) disable iff (!rst_n)
                   (vld_a && state == S_ISSUE) |-> (idx_a < k));

endmodule
