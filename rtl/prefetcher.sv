// prefetcher: streams a sequence of words from DRAM into a FIFO ahead of its consumer.
//
// Both accelerators read a long input sequence (the observations O of the forward algorithm,
// the success probabilities of a LoFreq column) once, one element per outer-loop iteration, so
// it lives in DRAM and is fetched ahead while the PE works. After 'start' the prefetcher issues
// reads for addresses base, base+1, ..., base+count-1 as long as the words in flight plus the
// words waiting in the FIFO stay below DEPTH; every response therefore has a FIFO slot and is
// always accepted. The consumer sees the head of the FIFO on out_data/out_valid and removes it
// with out_pop. The word addressing, the FIFO depth and the credit rule are this design's own:
// the prefetcher's inside is not published.
//
// Interface: mem_req_* is a valid/ready request channel (the address is held while valid is high
// and ready low); mem_resp_* returns read data in request order and has no back-pressure.
module prefetcher #(
  parameter int unsigned DW    = 64,
  parameter int unsigned AW    = 32,
  parameter int unsigned CW    = 32,   // width of the word count
  parameter int unsigned DEPTH = 16
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [AW-1:0] base,
  input  logic [CW-1:0] count,
  output logic          mem_req_valid,
  input  logic          mem_req_ready,
  output logic [AW-1:0] mem_req_addr,
  input  logic          mem_resp_valid,
  input  logic [DW-1:0] mem_resp_data,
  output logic          out_valid,
  output logic [DW-1:0] out_data,
  input  logic          out_pop
);

  localparam int unsigned PW = $clog2(DEPTH);

  logic [DW-1:0] fifo [DEPTH];
  logic [PW-1:0] wr_ptr, rd_ptr;
  logic [PW:0]   fill;        // words in the FIFO
  logic [PW:0]   inflight;    // requests issued, response not yet seen
  logic [CW-1:0] remaining;
  logic [AW-1:0] next_addr;
  logic          do_req, do_push, do_pop;

  assign mem_req_valid = (remaining != '0) && ((fill + inflight) < (PW+1)'(DEPTH));
  assign mem_req_addr  = next_addr;
  assign do_req  = mem_req_valid && mem_req_ready;
  assign do_push = mem_resp_valid;
  assign do_pop  = out_pop && out_valid;
  assign out_valid = (fill != '0);
  assign out_data  = fifo[rd_ptr];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_ptr    <= '0;
      rd_ptr    <= '0;
      fill      <= '0;
      inflight  <= '0;
      remaining <= '0;
      next_addr <= '0;
    end else begin
      if (start) begin
        remaining <= count;
        next_addr <= base;
      end else if (do_req) begin
        remaining <= remaining - 1'b1;
        next_addr <= next_addr + 1'b1;
      end
      inflight <= inflight + (PW+1)'(do_req) - (PW+1)'(do_push);
      fill     <= fill + (PW+1)'(do_push) - (PW+1)'(do_pop);
      if (do_push) wr_ptr <= wr_ptr + 1'b1;
      if (do_pop)  rd_ptr <= rd_ptr + 1'b1;
    end
  end

  always_ff @(posedge clk) if (do_push) fifo[wr_ptr] <= mem_resp_data;

  // a response always has a slot; nothing answers a request that was never made
  assert property (@(posedge clk) disable iff (!rst_n) do_push |-> (fill < (PW+1)'(DEPTH)));
  assert property (@(posedge clk) disable iff (!rst_n) do_push |-> (inflight != '0));

  initial assert (DEPTH == (1 << PW)) else $error("prefetcher DEPTH must be a power of two");

endmodule
