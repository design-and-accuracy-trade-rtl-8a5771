// posit_decode: splits a posit(N,ES) word into sign, scale and fraction (combinational).
//
// The word is negated first when its sign bit is set (posits use two's complement for negative
// values). The regime is the run of identical bits after the sign: a run of l ones gives k = l-1,
// a run of l zeros gives k = -l. The ES bits after the regime terminator are the unsigned exponent
// e (zero-padded when fewer than ES bits remain) and whatever follows is the fraction, returned
// left-aligned in FW = N-3-ES bits. The scale is k*2^ES + e, so the value is
// (-1)^sign * 2^scale * (1.frac). Zero and NaR are flagged separately; their other outputs are
// don't-care. This follows the format definition of the posit standard exactly; nothing here
// is a design choice beyond the output widths.
// Lint notes: the top bit of the magnitude is only non-zero for NaR, which is flagged
// separately, and the last bits shifted out after the exponent are not fraction bits.
module posit_decode #(
  parameter int unsigned N  = 64,
  parameter int unsigned ES = 18,
  localparam int unsigned SW = posit_pkg::scale_width(N, ES),
  localparam int unsigned FW = posit_pkg::frac_width(N, ES)
) (
  input  logic [N-1:0]        p,
  output logic                is_zero,
  output logic                is_nar,
  output logic                sign,
  output logic signed [SW-1:0] scale,
  output logic [FW-1:0]       frac
);

  logic [N-1:0]  mag;
  logic [N-2:0]  body;
  logic [N-2:0]  rest;
  logic          r;
  logic          run;
  int unsigned   len;
  logic signed [SW-1:0] k;
  logic [ES-1:0] e;

  always_comb begin
    is_zero = (p == '0);
    is_nar  = (p == {1'b1, {(N-1){1'b0}}});
    sign    = p[N-1];
    mag     = sign ? (~p + 1'b1) : p;
    body    = mag[N-2:0];
    r       = body[N-2];
    // length of the regime run
    len = 0;
    run = 1'b1;
    for (int i = N - 2; i >= 0; i--) begin
      if (run && (body[i] == r)) len++;
      else run = 1'b0;
    end
    k    = r ? SW'(len - 1) : -SW'(len);
    rest = body << (len + 1);
    e    = rest[N-2 -: ES];
    frac = rest[N-2-ES -: FW];
    scale = (k <<< ES) + SW'(e);
  end

endmodule
