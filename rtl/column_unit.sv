// column_unit: LoFreq column unit, NPE posit(64,12) PBD processing elements sharing one DRAM port.
//
// Each lane is a prefetcher plus a pbd_pe and computes the p-value of one column (its own NT,
// K and success probabilities), so up to NPE columns are in progress at once; the published
// unit has 8 PEs. The lanes' prefetchers ask for words through a round-robin arbiter onto one
// read port; each request carries its lane number as a tag, and the returning tag steers the
// data to that lane's FIFO. How the published unit distributes work over its PEs and shares
// memory is not described, so the lane-per-column organisation and the arbiter are this
// design's own choices.
//
// Interface, per lane l: pulse start[l] with num_trials[l], k_obs[l] and base[l] (DRAM word
// address of success_prob[1], one posit per 64-bit word); done[l] pulses with pvalue[l].
// mem_*: request channel valid/ready with address and tag; responses in request order, with
// their tag, no back-pressure.
module column_unit #(
  parameter int unsigned N        = posit_pkg::POSIT_N,
  parameter int unsigned ES       = posit_pkg::CU_ES,
  parameter int unsigned NPE      = 8,
  parameter int unsigned KMAX     = 4096,
  parameter int unsigned AW       = 32,
  parameter int unsigned TW       = 32,
  parameter int unsigned PF_DEPTH = 8,
  localparam int unsigned KW      = $clog2(KMAX + 1),
  localparam int unsigned TAGW    = (NPE > 1) ? $clog2(NPE) : 1
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic [NPE-1:0]  start,
  input  logic [TW-1:0]   num_trials [NPE],
  input  logic [KW-1:0]   k_obs [NPE],
  input  logic [AW-1:0]   base [NPE],
  output logic [NPE-1:0]  busy,
  output logic [NPE-1:0]  done,
  output logic [N-1:0]    pvalue [NPE],
  output logic            mem_req_valid,
  input  logic            mem_req_ready,
  output logic [AW-1:0]   mem_req_addr,
  output logic [TAGW-1:0] mem_req_tag,
  input  logic            mem_resp_valid,
  input  logic [63:0]     mem_resp_data,
  input  logic [TAGW-1:0] mem_resp_tag
);

  logic [NPE-1:0] req_v, req_r, gnt;
  logic [AW-1:0]  req_a [NPE];
  logic [TAGW-1:0] gnt_idx;

  for (genvar l = 0; l < NPE; l++) begin : g_lane
    logic         pf_valid, pf_pop;
    logic [63:0]  pf_data;

    prefetcher #(.DW(64), .AW(AW), .CW(TW), .DEPTH(PF_DEPTH)) u_pf (
      .clk(clk), .rst_n(rst_n), .start(start[l] && !busy[l]), .base(base[l]), .count(num_trials[l]),
      .mem_req_valid(req_v[l]), .mem_req_ready(req_r[l]), .mem_req_addr(req_a[l]),
      .mem_resp_valid(mem_resp_valid && mem_resp_tag == TAGW'(l)), .mem_resp_data(mem_resp_data),
      .out_valid(pf_valid), .out_data(pf_data), .out_pop(pf_pop)
    );

    pbd_pe #(.N(N), .ES(ES), .KMAX(KMAX), .TW(TW)) u_pe (
      .clk(clk), .rst_n(rst_n), .start(start[l]), .num_trials(num_trials[l]), .k_obs(k_obs[l]),
      .in_valid(pf_valid), .in_data(pf_data[N-1:0]), .in_pop(pf_pop),
      .busy(busy[l]), .done(done[l]), .pvalue(pvalue[l])
    );

    assign req_r[l] = gnt[l] && mem_req_ready;
  end

  rr_arbiter #(.NREQ(NPE)) u_arb (
    .clk(clk), .rst_n(rst_n), .req(req_v), .advance(mem_req_ready), .gnt(gnt), .gnt_idx(gnt_idx)
  );

  assign mem_req_valid = |req_v;
  assign mem_req_addr  = req_a[gnt_idx];
  assign mem_req_tag   = gnt_idx;

endmodule
