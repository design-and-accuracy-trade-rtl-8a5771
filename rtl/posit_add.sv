// posit_add: fully pipelined posit(N,ES) adder, one sum per cycle, LAT cycles latency.
//
// Stage 1 decodes both operands. Stage 2 orders them by magnitude (scale, then fraction) and
// takes the scale difference. Stage 3 shifts the smaller significand right by that difference
// into a field with FW+3 extra low bits; whatever falls off is kept as a sticky bit. Stage 4
// adds or subtracts the aligned significands (the sticky bit sits below the LSB, so a
// subtraction of a partly lost operand still rounds the right way). Stage 5 counts leading
// zeros and renormalises, adjusting the scale. Stage 6 rounds to the nearest posit, ties to
// even. The rest of the LAT = 8 cycles of the published posit(64,12)/(64,18) adders are padding
// registers; the stage cuts are this design's own. Exact cancellation gives 0, NaR in gives NaR.
// Subtraction is addition of the two's complement of an operand (posit negation is exact).
//
// Interface: 'a' and 'b' are sampled on every rising edge of clk; 'y' shows a+b LAT edges later.
// No stall, no reset.
// Lint notes: the smaller operand's scale is only used through the difference of scales, and
// the top bit of the normalised sum is always zero after the leading-one shift; both are
// reported as unused bits.
module posit_add #(
  parameter int unsigned N   = 64,
  parameter int unsigned ES  = 18,
  parameter int unsigned LAT = posit_pkg::ADD_LAT
) (
  input  logic         clk,
  input  logic [N-1:0] a,
  input  logic [N-1:0] b,
  output logic [N-1:0] y
);

  localparam int unsigned SW = posit_pkg::scale_width(N, ES);
  localparam int unsigned FW = posit_pkg::frac_width(N, ES);
  localparam int unsigned G  = FW + 3;          // extra low bits kept during alignment
  localparam int unsigned AW = FW + 1 + G;      // aligned significand width (hidden bit at MSB)
  localparam int unsigned SUMW = AW + 2;        // carry bit + aligned field + sticky bit

  // ---- stage 1: decode ----
  logic                 za, na, sa, zb, nb, sb;
  logic signed [SW-1:0] ca, cb;
  logic [FW-1:0]        fa, fb;

  posit_decode #(.N(N), .ES(ES)) u_dec_a (.p(a), .is_zero(za), .is_nar(na), .sign(sa), .scale(ca), .frac(fa));
  posit_decode #(.N(N), .ES(ES)) u_dec_b (.p(b), .is_zero(zb), .is_nar(nb), .sign(sb), .scale(cb), .frac(fb));

  typedef struct packed {
    logic                 zero;
    logic                 nar;
    logic                 sign;
    logic signed [SW-1:0] scale;
    logic [FW-1:0]        frac;
  } dec_t;

  dec_t s1_a, s1_b;

  always_ff @(posedge clk) begin
    s1_a <= '{zero: za, nar: na, sign: sa, scale: ca, frac: fa};
    s1_b <= '{zero: zb, nar: nb, sign: sb, scale: cb, frac: fb};
  end

  // ---- stage 2: order by magnitude ----
  dec_t                 s2_x, s2_y;      // |x| >= |y|
  logic [SW-1:0]        s2_diff;
  logic                 a_big;

  always_comb begin
    if (s1_b.zero)       a_big = 1'b1;
    else if (s1_a.zero)  a_big = 1'b0;
    else                 a_big = (s1_a.scale > s1_b.scale) ||
                                 ((s1_a.scale == s1_b.scale) && (s1_a.frac >= s1_b.frac));
  end

  always_ff @(posedge clk) begin
    s2_x    <= a_big ? s1_a : s1_b;
    s2_y    <= a_big ? s1_b : s1_a;
    s2_diff <= a_big ? SW'(s1_a.scale - s1_b.scale) : SW'(s1_b.scale - s1_a.scale);
  end

  // ---- stage 3: align the smaller operand ----
  logic                 s3_nar, s3_zero, s3_sign, s3_sub;
  logic signed [SW-1:0] s3_scale;
  logic [AW-1:0]        s3_xs, s3_ys;
  logic                 s3_sticky;
  logic [AW-1:0]        ysig, yal;
  logic                 ylost;

  always_comb begin
    ysig = {1'b1, s2_y.frac, {G{1'b0}}};
    if (s2_y.zero) begin
      yal   = '0;
      ylost = 1'b0;
    end else if (s2_diff >= SW'(AW)) begin
      yal   = '0;
      ylost = 1'b1;
    end else begin
      yal   = ysig >> s2_diff;
      ylost = 1'b0;
      for (int i = 0; i < AW; i++)
        if ((i < int'(s2_diff)) && ysig[i]) ylost = 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    s3_nar    <= s2_x.nar | s2_y.nar;
    s3_zero   <= s2_x.zero;               // x is the larger, so both are zero
    s3_sign   <= s2_x.sign;
    s3_sub    <= s2_x.sign ^ s2_y.sign;
    s3_scale  <= s2_x.scale;
    s3_xs     <= {1'b1, s2_x.frac, {G{1'b0}}};
    s3_ys     <= yal;
    s3_sticky <= ylost;
  end

  // ---- stage 4: add or subtract ----
  logic                 s4_nar, s4_zero, s4_sign;
  logic signed [SW-1:0] s4_scale;
  logic [SUMW-1:0]      s4_sum;

  always_ff @(posedge clk) begin
    s4_nar   <= s3_nar;
    s4_zero  <= s3_zero;
    s4_sign  <= s3_sign;
    s4_scale <= s3_scale;
    if (s3_sub) s4_sum <= {1'b0, s3_xs, 1'b0} - {1'b0, s3_ys, s3_sticky};
    else        s4_sum <= {1'b0, s3_xs, 1'b0} + {1'b0, s3_ys, s3_sticky};
  end

  // ---- stage 5: normalise ----
  logic                 s5_nar, s5_zero, s5_sign;
  logic signed [SW-1:0] s5_scale;
  logic [SUMW-2:0]      s5_frac;
  int unsigned          lz;
  logic [SUMW-1:0]      norm;

  always_comb begin
    lz = SUMW;
    for (int i = 0; i < SUMW; i++)
      if (s4_sum[i]) lz = SUMW - 1 - i;
    norm = s4_sum << lz;
  end

  always_ff @(posedge clk) begin
    s5_nar   <= s4_nar;
    s5_zero  <= s4_zero | (s4_sum == '0);
    s5_sign  <= s4_sign;
    s5_scale <= s4_scale + SW'(1) - SW'(lz);
    s5_frac  <= norm[SUMW-2:0];
  end

  // ---- stage 6: round and encode ----
  logic [N-1:0] enc, s6_y;

  posit_encode #(.N(N), .ES(ES), .FI(SUMW-1)) u_enc (
    .is_zero(s5_zero), .is_nar(s5_nar), .sign(s5_sign), .scale(s5_scale),
    .frac(s5_frac), .sticky(1'b0), .p(enc)
  );

  always_ff @(posedge clk) s6_y <= enc;

  pipe_delay #(.W(N), .D(LAT - 6)) u_pad (.clk(clk), .d(s6_y), .q(y));

  initial assert (LAT >= 6) else $error("posit_add needs LAT >= 6");

endmodule
