// tb_posit_add: checks posit_add against the bit-serial reference model.
//
// Three instances run side by side: posit(8,2) (the worked example of the format and an
// exhaustive sweep of all 65,536 operand pairs), posit(16,2) with random full-width operands,
// and the default posit(64,18) with random operands of limited fraction width over the whole
// scale range plus directed corner cases (minpos * maxpos, saturation, NaR, zero). A new pair
// enters every cycle and each result is compared exactly LAT = 8 cycles later, which checks
// both the value and the latency.
module tb_posit_add;
  import posit_ref_pkg::*;

  localparam int LAT = 8;
  localparam int NV  = 70000;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  logic [7:0]  a8,  b8,  y8;
  logic [15:0] a16, b16, y16;
  logic [63:0] a64, b64, y64;
  logic [7:0]  e8  [NV];
  logic [15:0] e16 [NV];
  logic [63:0] e64 [NV];

  posit_add #(.N(8),  .ES(2))  dut8  (.clk(clk), .a(a8),  .b(b8),  .y(y8));
  posit_add #(.N(16), .ES(2))  dut16 (.clk(clk), .a(a16), .b(b16), .y(y16));
  posit_add                    dut64 (.clk(clk), .a(a64), .b(b64), .y(y64));

  localparam int SMAX = 62 * (1 << 18);

  function automatic logic [63:0] corner64(int i);
    case (i % 8)
      0: return 64'd1;                         // minpos
      1: return 64'h7FFF_FFFF_FFFF_FFFF;       // maxpos
      2: return 64'h8000_0000_0000_0000;       // NaR
      3: return 64'd0;
      4: return 64'h4000_0000_0000_0000;       // 1.0
      5: return 64'hC000_0000_0000_0000;       // -1.0
      6: return 64'h8000_0000_0000_0001;       // -maxpos
      default: return rand_posit(64, 18, 20, SMAX);
    endcase
  endfunction

  initial begin
    for (int c = 0; c < NV + LAT; c++) begin
      if (c < NV) begin
        a8  = c[15:8];
        b8  = c[7:0];
        a16 = 16'($urandom);
        b16 = 16'($urandom);
        if (c < 64) begin
          a64 = corner64(c);
          b64 = corner64(c / 8);
        end else if (c < 20000) begin
          a64 = rand_posit(64, 18, 24, SMAX / 2);
          b64 = rand_posit(64, 18, 24, SMAX / 2);
        end else begin
          a64 = rand_posit(64, 18, 24, 12);
          b64 = rand_posit(64, 18, 24, 12);
          if (c % 5 == 0) b64 = -a64 + 64'(c % 3);   // near and exact cancellation
        end
        if (c == 0) begin               // worked example: 0_0001_10_1 = 1.5 * 2^-10, times 1.0
          a8 = 8'b0000_1101;
          b8 = 8'b0100_0000;
        end
        e8[c]  = add(a8,  b8,  8,  2)[7:0];
        e16[c] = add(a16, b16, 16, 2)[15:0];
        e64[c] = add(a64, b64, 64, 18);
      end
      @(posedge clk);
      #1;
      if (c >= LAT - 1 && c - (LAT - 1) < NV) begin
        int j;
        j = c - (LAT - 1);
        checks += 3;
        if (y8 !== e8[j]) begin
          failures++;
          if (failures < 10) $display("p8  #%0d: got %h exp %h", j, y8, e8[j]);
        end
        if (y16 !== e16[j]) begin
          failures++;
          if (failures < 10) $display("p16 #%0d: got %h exp %h", j, y16, e16[j]);
        end
        if (y64 !== e64[j]) begin
          failures++;
          if (failures < 10) $display("p64 #%0d: got %h exp %h", j, y64, e64[j]);
        end
      end
    end
    // the worked example must decode to 1.5 * 2^-10 in the reference as well
    begin
      pval_t v;
      v = decode(64'h0D, 8, 2);
      checks++;
      if (!(v.scale == -10 && v.sig == 1.5)) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (NV + LAT + 1000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
