// rr_arbiter: round-robin arbiter over NREQ requesters.
//
// Grants the first requester at or after the one following the last granted requester, so
// every requester is served within NREQ grants. 'gnt' is one-hot (or zero) and combinational;
// 'advance' (the granted request was accepted downstream) moves the priority pointer.
module rr_arbiter #(
  parameter int unsigned NREQ = 8,
  localparam int unsigned IW  = (NREQ > 1) ? $clog2(NREQ) : 1
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic [NREQ-1:0] req,
  input  logic            advance,
  output logic [NREQ-1:0] gnt,
  output logic [IW-1:0]   gnt_idx
);

  logic [IW-1:0] ptr;    // highest priority this cycle

  always_comb begin
    gnt     = '0;
    gnt_idx = '0;
    for (int i = NREQ - 1; i >= 0; i--) begin
      logic [IW-1:0] j;
      j = IW'((int'(ptr) + i) % NREQ);
      if (req[j]) begin
        gnt     = '0;
        gnt[j]  = 1'b1;
        gnt_idx = IW'(j);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                ptr <= '0;
    else if (advance && |gnt)  ptr <= IW'((int'(gnt_idx) + 1) % NREQ);
  end

  assert property (@(posedge clk) disable iff (!rst_n) $onehot0(gnt));

endmodule
