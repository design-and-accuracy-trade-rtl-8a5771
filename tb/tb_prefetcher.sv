// tb_prefetcher: streams words through the prefetcher under random memory stalls and pops.
//
// A DRAM model with 40-cycle latency and random ready gaps holds a known pattern. Several
// transfers (lengths 1, 5, 37, 100) are started; the consumer pops on random cycles. Every word
// must come out once, in address order, and the prefetcher must issue exactly 'count' reads.
// Its occupancy (words in flight plus words buffered) must never exceed DEPTH, and with an
// idle consumer it must fill up to DEPTH words ahead.
module tb_prefetcher;

  localparam int DEPTH = 8;

  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n = 1'b0;
  int checks = 0, failures = 0;

  logic        start = 0, pop = 0;
  logic [31:0] base = 0, count = 0;
  logic        rv, rr, pv, ov;
  logic [31:0] ra;
  logic [63:0] pd, od;
  logic [1:0]  tag_unused;

  prefetcher #(.DEPTH(DEPTH)) dut (
    .clk(clk), .rst_n(rst_n), .start(start), .base(base), .count(count),
    .mem_req_valid(rv), .mem_req_ready(rr), .mem_req_addr(ra),
    .mem_resp_valid(pv), .mem_resp_data(pd),
    .out_valid(ov), .out_data(od), .out_pop(pop)
  );

  dram_model #(.TAGW(2), .LATENCY(40), .STALL_PCT(30)) u_dram (
    .clk(clk), .req_valid(rv), .req_ready(rr), .req_addr(ra), .req_tag(2'd0),
    .resp_valid(pv), .resp_data(pd), .resp_tag(tag_unused)
  );

  int max_occ = 0;
  always @(posedge clk) if (rst_n && int'(dut.fill) + int'(dut.inflight) > max_occ) max_occ = int'(dut.fill) + int'(dut.inflight);

  function automatic logic [63:0] pattern(int a);
    return {32'(a) ^ 32'hA5A5_0000, 32'(a * 7 + 3)};
  endfunction

  task automatic transfer(int b, int n, int pop_pct, int hold);
    int got, reads0;
    reads0 = u_dram.reads;
    @(negedge clk);
    base = b; count = n; start = 1;
    @(negedge clk);
    start = 0;
    repeat (hold) @(negedge clk);        // consumer idle: prefetcher runs ahead
    got = 0;
    while (got < n) begin
      pop = ($urandom_range(99) < pop_pct);
      @(posedge clk);
      if (pop && ov) begin
        checks++;
        if (od !== pattern(b + got)) begin
          failures++;
          $display("word %0d of transfer at %0d: %h expected %h", got, b, od, pattern(b + got));
        end
        got++;
      end
      @(negedge clk);
    end
    pop = 0;
    repeat (60) @(negedge clk);
    checks++;
    if (u_dram.reads - reads0 != n || ov) begin
      failures++;
      $display("transfer at %0d: %0d reads for %0d words", b, u_dram.reads - reads0, n);
    end
  endtask

  initial begin
    for (int a = 0; a < 4096; a++) u_dram.poke(a, pattern(a));
    repeat (3) @(posedge clk);
    rst_n = 1;
    transfer(10, 1, 50, 0);
    transfer(100, 5, 100, 0);
    transfer(300, 37, 30, 200);
    transfer(1000, 100, 70, 0);
    checks++;
    if (max_occ != DEPTH) begin
      failures++;
      $display("largest occupancy %0d, expected %0d", max_occ, DEPTH);
    end
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
