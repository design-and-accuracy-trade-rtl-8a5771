// dram_model: behavioural model of the DRAM read path used by the testbenches.
//
// Holds 2^AWM 64-bit words (filled by the testbench through the poke task). Requests are
// accepted on a valid/ready channel with ready withdrawn on random cycles (STALL_PCT percent)
// and answered in order exactly LATENCY cycles later; the request tag is returned with the data.
// Setting 'block' from the testbench withholds ready until it is cleared again.
// This stands in for the off-chip memory of the FPGA card, which is not part of the design.
module dram_model #(
  parameter int unsigned AW        = 32,
  parameter int unsigned AWM       = 12,
  parameter int unsigned TAGW      = 4,
  parameter int unsigned LATENCY   = 20,
  parameter int unsigned STALL_PCT = 20
) (
  input  logic            clk,
  input  logic            req_valid,
  output logic            req_ready,
  input  logic [AW-1:0]   req_addr,
  input  logic [TAGW-1:0] req_tag,
  output logic            resp_valid,
  output logic [63:0]     resp_data,
  output logic [TAGW-1:0] resp_tag
);

  logic [63:0] mem [1 << AWM];
  logic            pv [LATENCY];
  logic [63:0]     pd [LATENCY];
  logic [TAGW-1:0] pt [LATENCY];
  int unsigned     reads = 0;
  bit              block = 1'b0;

  task automatic poke(input int unsigned addr, input logic [63:0] data);
    mem[addr[AWM-1:0]] = data;
  endtask

  initial begin
    for (int i = 0; i < LATENCY; i++) pv[i] = 1'b0;
    req_ready = 1'b0;   // nothing is accepted on the first edge, while the design is still in reset
  end

  always @(posedge clk) begin
    for (int i = LATENCY - 1; i > 0; i--) begin
      pv[i] <= pv[i-1];
      pd[i] <= pd[i-1];
      pt[i] <= pt[i-1];
    end
    pv[0] <= req_valid && req_ready;
    pd[0] <= mem[req_addr[AWM-1:0]];
    pt[0] <= req_tag;
    if (req_valid && req_ready) reads++;
    req_ready <= !block && ($urandom_range(99) >= STALL_PCT);
  end

  assign resp_valid = pv[LATENCY-1];
  assign resp_data  = pd[LATENCY-1];
  assign resp_tag   = pt[LATENCY-1];

endmodule
