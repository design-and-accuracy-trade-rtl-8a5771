// posit_stats_accel: the two posit accelerators for statistical computations, side by side.
//
// forward_algorithm_unit computes HMM likelihoods (VICAR) in posit(64,18) with one fully
// unrolled PE for H = 64 states; column_unit computes LoFreq p-values in posit(64,12) with 8
// Poisson-binomial PEs. Both replace the usual log-space arithmetic by posit arithmetic, whose
// tapered precision keeps values far below the binary64 range without logarithms. The units are
// independent: each has its own host control signals and its own DRAM read port (the off-chip
// memory and the host platform are outside this design). Grouping both under one top is this
// design's choice; they are separate accelerators built from the same posit units.
//
// Ports: fau_* are the forward-algorithm unit's (see forward_algorithm_unit), cu_* the column
// unit's (see column_unit); each *_mem_* group connects to a DRAM controller read port.
module posit_stats_accel
  import posit_pkg::*;
#(
  parameter int unsigned N      = POSIT_N,
  parameter int unsigned FAU_ES_P = FAU_ES,
  parameter int unsigned CU_ES_P  = CU_ES,
  parameter int unsigned H      = 64,
  parameter int unsigned NSYM   = 16,
  parameter int unsigned NPE    = 8,
  parameter int unsigned KMAX   = 4096,
  parameter int unsigned AW     = 32,
  parameter int unsigned TW     = 32,
  localparam int unsigned IDX_W = (H > 1) ? $clog2(H) : 1,
  localparam int unsigned OBS_W = (NSYM > 1) ? $clog2(NSYM) : 1,
  localparam int unsigned CFG_W = (IDX_W > OBS_W) ? IDX_W : OBS_W,
  localparam int unsigned KW    = $clog2(KMAX + 1),
  localparam int unsigned TAGW  = (NPE > 1) ? $clog2(NPE) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  // forward-algorithm unit: host side
  input  logic             fau_cfg_we,
  input  fau_cfg_e         fau_cfg_sel,
  input  logic [CFG_W-1:0] fau_cfg_row,
  input  logic [CFG_W-1:0] fau_cfg_col,
  input  logic [N-1:0]     fau_cfg_data,
  input  logic             fau_start,
  input  logic [TW-1:0]    fau_num_steps,
  input  logic [AW-1:0]    fau_obs_base,
  output logic             fau_busy,
  output logic             fau_done,
  output logic [N-1:0]     fau_likelihood,
  output logic [31:0]      fau_cycles,
  // forward-algorithm unit: DRAM read port
  output logic             fau_mem_req_valid,
  input  logic             fau_mem_req_ready,
  output logic [AW-1:0]    fau_mem_req_addr,
  input  logic             fau_mem_resp_valid,
  input  logic [63:0]      fau_mem_resp_data,
  // column unit: host side
  input  logic [NPE-1:0]   cu_start,
  input  logic [TW-1:0]    cu_num_trials [NPE],
  input  logic [KW-1:0]    cu_k_obs [NPE],
  input  logic [AW-1:0]    cu_base [NPE],
  output logic [NPE-1:0]   cu_busy,
  output logic [NPE-1:0]   cu_done,
  output logic [N-1:0]     cu_pvalue [NPE],
  // column unit: DRAM read port
  output logic             cu_mem_req_valid,
  input  logic             cu_mem_req_ready,
  output logic [AW-1:0]    cu_mem_req_addr,
  output logic [TAGW-1:0]  cu_mem_req_tag,
  input  logic             cu_mem_resp_valid,
  input  logic [63:0]      cu_mem_resp_data,
  input  logic [TAGW-1:0]  cu_mem_resp_tag
);

  forward_algorithm_unit #(.N(N), .ES(FAU_ES_P), .H(H), .NSYM(NSYM), .AW(AW), .TW(TW)) u_fau (
    .clk(clk), .rst_n(rst_n),
    .cfg_we(fau_cfg_we), .cfg_sel(fau_cfg_sel), .cfg_row(fau_cfg_row), .cfg_col(fau_cfg_col),
    .cfg_data(fau_cfg_data), .start(fau_start), .num_steps(fau_num_steps),
    .obs_base(fau_obs_base), .busy(fau_busy), .done(fau_done), .likelihood(fau_likelihood),
    .cycles(fau_cycles),
    .mem_req_valid(fau_mem_req_valid), .mem_req_ready(fau_mem_req_ready),
    .mem_req_addr(fau_mem_req_addr), .mem_resp_valid(fau_mem_resp_valid),
    .mem_resp_data(fau_mem_resp_data)
  );

  column_unit #(.N(N), .ES(CU_ES_P), .NPE(NPE), .KMAX(KMAX), .AW(AW), .TW(TW)) u_cu (
    .clk(clk), .rst_n(rst_n), .start(cu_start), .num_trials(cu_num_trials), .k_obs(cu_k_obs),
    .base(cu_base), .busy(cu_busy), .done(cu_done), .pvalue(cu_pvalue),
    .mem_req_valid(cu_mem_req_valid), .mem_req_ready(cu_mem_req_ready),
    .mem_req_addr(cu_mem_req_addr), .mem_req_tag(cu_mem_req_tag),
    .mem_resp_valid(cu_mem_resp_valid), .mem_resp_data(cu_mem_resp_data),
    .mem_resp_tag(cu_mem_resp_tag)
  );

endmodule
