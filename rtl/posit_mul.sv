// posit_mul: fully pipelined posit(N,ES) multiplier, one product per cycle, LAT cycles latency.
//
// Stage 1 decodes both operands into sign, scale and fraction. Stage 2 multiplies the two
// significands (1.fa * 1.fb, exact, 2*FW+2 bits), adds the scales and XORs the signs. Stage 3
// normalises a product in [2,4) by one place. Stage 4 rounds the exact product to the nearest
// posit (ties to even) and encodes it. The remaining LAT-4 cycles are padding registers so that
// the unit has the 12-cycle latency of the published posit(64,12) and posit(64,18) multipliers;
// how the published HLS unit divides its work over those cycles is not known, so the stage cuts
// here are this design's own. NaR times anything is NaR; zero times a real is zero.
//
// Interface: 'a' and 'b' are sampled on every rising edge of clk; 'y' shows a*b LAT edges later.
// There is no stall and no reset: the unit is a pure pipeline and its users track validity.
module posit_mul #(
  parameter int unsigned N   = 64,
  parameter int unsigned ES  = 18,
  parameter int unsigned LAT = posit_pkg::MUL_LAT
) (
  input  logic         clk,
  input  logic [N-1:0] a,
  input  logic [N-1:0] b,
  output logic [N-1:0] y
);

  localparam int unsigned SW = posit_pkg::scale_width(N, ES);
  localparam int unsigned FW = posit_pkg::frac_width(N, ES);
  localparam int unsigned PW = 2 * FW + 2;   // width of the exact significand product

  // ---- stage 1: decode ----
  logic                 za, na, sa, zb, nb, sb;
  logic signed [SW-1:0] ca, cb;
  logic [FW-1:0]        fa, fb;

  posit_decode #(.N(N), .ES(ES)) u_dec_a (.p(a), .is_zero(za), .is_nar(na), .sign(sa), .scale(ca), .frac(fa));
  posit_decode #(.N(N), .ES(ES)) u_dec_b (.p(b), .is_zero(zb), .is_nar(nb), .sign(sb), .scale(cb), .frac(fb));

  logic                 s1_zero, s1_nar, s1_sign;
  logic signed [SW-1:0] s1_ca, s1_cb;
  logic [FW-1:0]        s1_fa, s1_fb;

  always_ff @(posedge clk) begin
    s1_nar  <= na | nb;
    s1_zero <= za | zb;
    s1_sign <= sa ^ sb;
    s1_ca   <= ca;
    s1_cb   <= cb;
    s1_fa   <= fa;
    s1_fb   <= fb;
  end

  // ---- stage 2: significand product and scale sum ----
  logic                 s2_zero, s2_nar, s2_sign;
  logic signed [SW-1:0] s2_scale;
  logic [PW-1:0]        s2_prod;

  always_ff @(posedge clk) begin
    s2_nar   <= s1_nar;
    s2_zero  <= s1_zero;
    s2_sign  <= s1_sign;
    s2_scale <= s1_ca + s1_cb;
    s2_prod  <= PW'({1'b1, s1_fa}) * PW'({1'b1, s1_fb});
  end

  // ---- stage 3: normalise [1,4) to [1,2) ----
  logic                 s3_zero, s3_nar, s3_sign;
  logic signed [SW-1:0] s3_scale;
  logic [PW-2:0]        s3_frac;

  always_ff @(posedge clk) begin
    s3_nar  <= s2_nar;
    s3_zero <= s2_zero;
    s3_sign <= s2_sign;
    if (s2_prod[PW-1]) begin
      s3_scale <= s2_scale + 1'b1;
      s3_frac  <= s2_prod[PW-2:0];
    end else begin
      s3_scale <= s2_scale;
      s3_frac  <= {s2_prod[PW-3:0], 1'b0};
    end
  end

  // ---- stage 4: round and encode ----
  logic [N-1:0] enc, s4_y;

  posit_encode #(.N(N), .ES(ES), .FI(PW-1)) u_enc (
    .is_zero(s3_zero), .is_nar(s3_nar), .sign(s3_sign), .scale(s3_scale),
    .frac(s3_frac), .sticky(1'b0), .p(enc)
  );

  always_ff @(posedge clk) s4_y <= enc;

  // ---- padding to the published latency ----
  pipe_delay #(.W(N), .D(LAT - 4)) u_pad (.clk(clk), .d(s4_y), .q(y));

  initial assert (LAT >= 4) else $error("posit_mul needs LAT >= 4");

endmodule
