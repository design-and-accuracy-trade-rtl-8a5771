// posit_encode: rounds sign, scale and fraction to the nearest posit(N,ES) word (combinational).
//
// The scale is split into the regime value k = floor(scale / 2^ES) and the exponent
// e = scale mod 2^ES. The regime run (k+1 ones then a zero for k >= 0, -k zeros then a one
// for k < 0), e and the fraction are laid out as one bit string; the first N-1 bits form the
// posit body and the rest is rounded to nearest, ties to even, on the bit string as the posit
// standard defines it. Values beyond the largest posit saturate to maxpos and nonzero values
// below the smallest saturate to minpos: a posit never rounds to zero or to NaR. The result is
// negated (two's complement) for a negative sign. 'sticky' carries any nonzero bits the
// caller dropped below 'frac'. FI, the width of the incoming fraction, is free.
module posit_encode #(
  parameter int unsigned N  = 64,
  parameter int unsigned ES = 18,
  parameter int unsigned FI = 88,
  localparam int unsigned SW = posit_pkg::scale_width(N, ES)
) (
  input  logic                 is_zero,
  input  logic                 is_nar,
  input  logic                 sign,
  input  logic signed [SW-1:0] scale,
  input  logic [FI-1:0]        frac,
  input  logic                 sticky,
  output logic [N-1:0]         p
);

  localparam int unsigned VW = 2 + ES + FI + (N - 1);
  localparam logic signed [SW-1:0] KMAX = SW'(N - 2);     // regime value of maxpos
  localparam logic signed [SW-1:0] KMIN = -SW'(N - 2);    // regime value of minpos

  logic signed [SW-1:0] k;
  logic [ES-1:0]        e;
  logic [VW-1:0]        v;
  logic [N-2:0]         body;
  logic                 guard;
  logic                 st;
  logic [N-1:0]         mag;

  always_comb begin
    k = scale >>> ES;
    e = scale[ES-1:0];
    v = '0;
    if (k >= KMAX) begin
      body  = '1;                       // maxpos
      guard = 1'b0;
      st    = 1'b0;
    end else if (k < KMIN) begin
      body  = (N-1)'(1);                // minpos
      guard = 1'b0;
      st    = 1'b0;
    end else begin
      if (k >= 0) begin
        v = {2'b10, e, frac, {(N-1){1'b0}}};
        v = VW'($signed(v) >>> k);
      end else begin
        v = {2'b01, e, frac, {(N-1){1'b0}}};
        v = v >> (-k - 1);
      end
      body  = v[VW-1 -: N-1];
      guard = v[VW-N];
      st    = (|v[VW-N-1:0]) | sticky;
      body  = body + {{(N-2){1'b0}}, guard & (st | body[0])};
    end
    mag = {1'b0, body};
    if (is_nar)       p = {1'b1, {(N-1){1'b0}}};
    else if (is_zero) p = '0;
    else              p = sign ? (~mag + 1'b1) : mag;
  end

endmodule
