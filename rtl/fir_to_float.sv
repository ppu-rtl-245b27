// FIR to IEEE 754 binary32 encoder (back half of posit-to-float conversion).
//
// Packs sign, total exponent and significand (MI bits, hidden bit at MSB) of
// a decoded posit into a binary32 word. For posits up to 24 fraction bits the
// conversion is exact; wider significands are rounded to nearest even.
// Exponents above 127 give infinity and below -126 give a signed zero (no
// posit<=32 with ES<=2 reaches either). Posit zero gives +0.0 and NaR gives
// the quiet NaN 0x7FC00000.
//
// Purely combinational. The NaR, overflow and underflow mappings are this
// design's choices.
module fir_to_float
  import ppu_pkg::*;
#(
  parameter int unsigned MI  = 12,
  parameter int unsigned TEW = 10
) (
  input  logic                  sign_i,
  input  logic signed [TEW-1:0] te_i,
  input  logic [MI-1:0]         mant_i,
  input  logic                  zero_i,
  input  logic                  nar_i,
  output logic [FLOAT_W-1:0]    float_o
);

  logic [MI+23:0]        ext;
  logic [24:0]           sig;     // 1.f23 plus carry
  logic                  r, s, up;
  logic signed [TEW:0]   te;

  always_comb begin
    ext = {mant_i, 24'd0};
    r   = ext[MI-1];
    s   = |ext[MI-2:0];
    up  = r & (s | ext[MI]);
    sig = {1'b0, ext[MI+23 -: 24]} + 25'(up);
    te  = (TEW+1)'(te_i);
    if (sig[24]) begin
      sig = sig >> 1;
      te  = te + 1'b1;
    end
    if (te > 127)       float_o = {sign_i, 8'hFF, 23'd0};
    else if (te < -126) float_o = {sign_i, 31'd0};
    else                float_o = {sign_i, 8'(te + 127), sig[22:0]};
    if (zero_i) float_o = '0;
    if (nar_i)  float_o = 32'h7FC0_0000;
  end

endmodule
