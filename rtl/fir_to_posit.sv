// FIR to posit encoder with round to nearest even (normalisation stage).
//
// Takes a normalised FIR value (sign, total exponent te, significand 1.f of
// MI bits with the hidden bit at the MSB, and a sticky flag for nonzero bits
// already discarded) and produces the posit<N,ES> nearest to it.
// te is split into the regime k = floor(te/2^ES) and exponent e = te - k*2^ES;
// k is clipped to [-(N-1), N-2], beyond which the result saturates to
// minpos/maxpos (a posit never rounds to zero or NaR). The string
// regime|stop|e|f is built by an arithmetic right shift of "10" (k>=0) or
// "01" (k<0) followed by e and f; the top N-1 bits are the posit body, its
// LSB the guard bit G, the next bit the round bit R, and the OR of all lower
// bits with sticky_i the sticky bit S. The body is incremented when
// R & (G | S). A nonzero value that would round to body 0 is held at minpos.
// The body is negated for negative results.
//
// Purely combinational. The splitting, clipping and G/R/S rounding follow the
// description of the design; the shift-based packing is this design's own.
module fir_to_posit
  import ppu_pkg::*;
#(
  parameter int unsigned N   = 16,
  parameter int unsigned ES  = 2,
  parameter int unsigned MI  = norm_width(N, ES),
  parameter int unsigned TEW = te_width(N, ES)
) (
  input  logic                  sign_i,
  input  logic signed [TEW-1:0] te_i,
  input  logic [MI-1:0]         mant_i,
  input  logic                  sticky_i,
  input  logic                  zero_i,
  input  logic                  nar_i,
  output logic [N-1:0]          posit_o
);

  localparam int unsigned FI = MI - 1;
  localparam int unsigned SW = 2 + ES + FI + N;

  logic signed [TEW-1:0] k;
  logic [ES+FI-1:0]      ef;
  logic [SW-1:0]         str;
  logic [SW-1:0]         shd;
  logic [N-2:0]          body;
  logic [N-2:0]          body_r;
  logic                  g, r, s, up;
  int unsigned           sh;

  always_comb begin
    k   = te_i >>> ES;
    ef  = (ES + FI)'(mant_i[FI-1:0]) |
          ((ES + FI)'(te_i & TEW'((1 << ES) - 1)) << FI);
    str = {(k >= 0) ? 2'b10 : 2'b01, ef, {N{1'b0}}};
    sh  = (k >= 0) ? int'(k) : -int'(k) - 1;
    if (sh > N - 2) sh = N - 2;
    shd = SW'($signed(str) >>> sh);
    body = shd[SW-1 -: N-1];
    g    = body[0];
    r    = shd[SW-N];
    s    = (|shd[SW-N-1:0]) | sticky_i;
    up   = r & (g | s);
    body_r = (body == '1) ? body : body + (N-1)'(up);
    if (k > $signed(TEW'(N - 2)))         body_r = '1;                  // maxpos
    else if (k < -$signed(TEW'(N - 1)))   body_r = (N-1)'(1);           // minpos
    if (body_r == '0) body_r = (N-1)'(1);
    posit_o = sign_i ? (~{1'b0, body_r} + 1'b1) : {1'b0, body_r};
    if (zero_i) posit_o = '0;
    if (nar_i)  posit_o = {1'b1, {(N-1){1'b0}}};
  end

endmodule
