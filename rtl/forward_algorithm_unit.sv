// forward_algorithm_unit: posit accelerator for the HMM forward algorithm.
//
// For t = 1..T it computes alpha_t[q] = (sum_p alpha_{t-1}[p] * A[p][q]) * B[q][O_t] for every
// state q, and finally the likelihood sum_q alpha_T[q], all in posit(64,18), whose range
// (down to 2^-16,252,928) holds likelihoods that underflow binary64. The outer loop over t is
// sequential; the inner loop over q is pipelined through one fau_pe, which takes a new q every
// cycle. One outer iteration therefore takes H issue cycles plus the PE latency
// (H + 24 + 8*log2 H cycles), the timing of the published unit, and the prefetcher fetches the
// observations O_t from DRAM meanwhile.
//
// Storage (arrays; an FPGA build maps them to block RAM or registers):
//   a_mem[q][p] = A[p][q]    the whole column of A for one q is read in one cycle
//   b_mem[q][s] = B[q][s]    one element per cycle
//   alpha_prev, alpha_next   H registers each; alpha_prev feeds all H PE lanes at once, results
//                            are written into alpha_next as they leave the PE, and the two are
//                            swapped on the cycle the last result arrives (the "copy" of the
//                            algorithm costs no cycle).
// The final likelihood reuses the PE: alpha_T is sent through once with every A entry forced
// to 1.0 and B to 1.0, so the reduction tree forms the sum (multiplying by 1.0 is exact).
// These choices, the host write port and the one-observation-per-DRAM-word layout are this
// design's own; the paper gives the PE and the loop structure.
//
// Interface: the host loads A, B and the initial alpha through cfg_* (one posit per cycle, only
// while the unit is idle), then pulses start with num_steps = T and obs_base = DRAM word address
// of O_1. done pulses for one cycle with likelihood valid; 'cycles' counts the cycles from start
// to done. mem_* is the DRAM read port of the prefetcher (see prefetcher).
// Lint notes: only the low OBS_W bits of each 64-bit DRAM word carry the observation, so the
// upper bits are read and dropped; rst_n is also used by the disable clause of the assertion,
// which a linter reports as a reset used both synchronously and asynchronously.
module forward_algorithm_unit
  import posit_pkg::*;
#(
  parameter int unsigned N        = POSIT_N,
  parameter int unsigned ES       = FAU_ES,
  parameter int unsigned H        = 64,
  parameter int unsigned NSYM     = 16,
  parameter int unsigned AW       = 32,
  parameter int unsigned TW       = 32,
  parameter int unsigned PF_DEPTH = 16,
  localparam int unsigned IDX_W   = (H > 1) ? $clog2(H) : 1,
  localparam int unsigned OBS_W   = (NSYM > 1) ? $clog2(NSYM) : 1,
  localparam int unsigned CFG_W   = (IDX_W > OBS_W) ? IDX_W : OBS_W
) (
  input  logic             clk,
  input  logic             rst_n,
  // host configuration
  input  logic             cfg_we,
  input  fau_cfg_e         cfg_sel,
  input  logic [CFG_W-1:0] cfg_row,
  input  logic [CFG_W-1:0] cfg_col,
  input  logic [N-1:0]     cfg_data,
  // run control
  input  logic             start,
  input  logic [TW-1:0]    num_steps,
  input  logic [AW-1:0]    obs_base,
  output logic             busy,
  output logic             done,
  output logic [N-1:0]     likelihood,
  output logic [31:0]      cycles,
  // DRAM read port
  output logic             mem_req_valid,
  input  logic             mem_req_ready,
  output logic [AW-1:0]    mem_req_addr,
  input  logic             mem_resp_valid,
  input  logic [63:0]      mem_resp_data
);

  localparam logic [N-1:0] ONE = N'(posit_one(N));

  typedef enum logic [2:0] {S_IDLE, S_WAIT, S_ISSUE, S_DRAIN, S_SUM, S_SUM_WAIT} state_e;

  state_e           state;
  logic [N-1:0]     a_mem [H][H];
  logic [N-1:0]     b_mem [H][NSYM];
  logic [N-1:0]     alpha_prev [H];
  logic [N-1:0]     alpha_next [H];
  logic [TW-1:0]    t_left;        // outer iterations still to start
  logic [IDX_W-1:0] q;             // next state to issue
  logic [OBS_W-1:0] ot;            // current observation
  logic [IDX_W:0]   rcv;           // results received in this outer iteration

  // ---- prefetcher for O ----
  logic          pf_valid, pf_pop;
  logic [63:0]   pf_data;

  prefetcher #(.DW(64), .AW(AW), .CW(TW), .DEPTH(PF_DEPTH)) u_pf (
    .clk(clk), .rst_n(rst_n), .start(start && state == S_IDLE), .base(obs_base), .count(num_steps),
    .mem_req_valid(mem_req_valid), .mem_req_ready(mem_req_ready), .mem_req_addr(mem_req_addr),
    .mem_resp_valid(mem_resp_valid), .mem_resp_data(mem_resp_data),
    .out_valid(pf_valid), .out_data(pf_data), .out_pop(pf_pop)
  );

  // ---- PE ----
  logic             pe_in_valid, pe_out_valid, sum_mode;
  logic [N-1:0]     pe_a_col [H];
  logic [N-1:0]     pe_b;
  logic [N-1:0]     pe_alpha;
  logic [IDX_W-1:0] pe_out_idx;

  assign sum_mode    = (state == S_SUM);
  assign pe_in_valid = (state == S_ISSUE) || (state == S_SUM);
  always_comb begin
    for (int p = 0; p < H; p++) pe_a_col[p] = sum_mode ? ONE : a_mem[q][p];
    pe_b = sum_mode ? ONE : b_mem[q][ot];
  end

  fau_pe #(.N(N), .ES(ES), .H(H), .IDX_W(IDX_W)) u_pe (
    .clk(clk), .rst_n(rst_n), .in_valid(pe_in_valid), .in_idx(q),
    .alpha_prev(alpha_prev), .a_col(pe_a_col), .b_prob(pe_b),
    .out_valid(pe_out_valid), .out_idx(pe_out_idx), .alpha(pe_alpha)
  );

  // ---- controller ----
  logic last_result;
  assign last_result = (state == S_DRAIN) && pe_out_valid && (rcv == (IDX_W+1)'(H - 1));
  // the next observation is taken when waiting, or straight at the end of an iteration
  assign pf_pop = pf_valid && ((state == S_WAIT) || (last_result && t_left != '0));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      t_left     <= '0;
      q          <= '0;
      ot         <= '0;
      rcv        <= '0;
      done       <= 1'b0;
      likelihood <= '0;
      cycles     <= '0;
    end else begin
      done <= 1'b0;
      if (state != S_IDLE) cycles <= cycles + 1'b1;
      case (state)
        S_IDLE: if (start) begin
          t_left <= num_steps;
          cycles <= 32'd1;
          state  <= (num_steps == '0) ? S_SUM : S_WAIT;
        end
        S_WAIT: if (pf_valid) begin
          ot     <= pf_data[OBS_W-1:0];
          t_left <= t_left - 1'b1;
          q      <= '0;
          rcv    <= '0;
          state  <= S_ISSUE;
        end
        S_ISSUE: begin
          q <= q + 1'b1;
          if (q == IDX_W'(H - 1)) state <= S_DRAIN;
        end
        S_DRAIN: if (last_result) begin
          q   <= '0;
          rcv <= '0;
          if (t_left == '0) state <= S_SUM;
          else if (pf_valid) begin
            ot     <= pf_data[OBS_W-1:0];
            t_left <= t_left - 1'b1;
            state  <= S_ISSUE;
          end else state <= S_WAIT;
        end
        S_SUM: begin
          q     <= '0;
          state <= S_SUM_WAIT;
        end
        S_SUM_WAIT: if (pe_out_valid) begin
          likelihood <= pe_alpha;
          done       <= 1'b1;
          state      <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
      if ((state == S_ISSUE || state == S_DRAIN) && pe_out_valid) rcv <= rcv + 1'b1;
      if (last_result) rcv <= '0;
    end
  end

  assign busy = (state != S_IDLE);

  // ---- storage ----
  always_ff @(posedge clk) begin
    if (cfg_we && state == S_IDLE) begin
      case (cfg_sel)
        CFG_A:     a_mem[cfg_col[IDX_W-1:0]][cfg_row[IDX_W-1:0]] <= cfg_data;
        CFG_B:     b_mem[cfg_row[IDX_W-1:0]][cfg_col[OBS_W-1:0]] <= cfg_data;
        default:   ;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (cfg_we && state == S_IDLE && cfg_sel == CFG_ALPHA)
      alpha_prev[cfg_row[IDX_W-1:0]] <= cfg_data;
    else if (last_result)
      for (int i = 0; i < H; i++)
        alpha_prev[i] <= (IDX_W'(i) == pe_out_idx) ? pe_alpha : alpha_next[i];
    if ((state == S_ISSUE || state == S_DRAIN) && pe_out_valid)
      alpha_next[pe_out_idx] <= pe_alpha;
  end

  // results come back in issue order and never outside an outer iteration
  assert property (@(posedge clk) disable iff (!rst_n)
                   (pe_out_valid && state == S_DRAIN) |-> (pe_out_idx == rcv[IDX_W-1:0]));

endmodule
