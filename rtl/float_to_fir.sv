// IEEE 754 binary32 to FIR decoder (front half of float-to-posit conversion).
//
// Splits a binary32 word into sign, unbiased total exponent te = exp-127 and
// the 24-bit significand 1.f. Subnormals are normalised with a leading-zero
// count (te = -126 - shift). Zero (either sign) is flagged as zero; infinities
// and NaNs are flagged as NaR, the posit value for "not a real".
//
// Purely combinational. That Inf and NaN map to NaR is this design's choice.
module float_to_fir
  import ppu_pkg::*;
#(
  parameter int unsigned TEW = 10
) (
  input  logic [FLOAT_W-1:0]    float_i,
  output logic                  sign_o,
  output logic signed [TEW-1:0] te_o,
  output logic [23:0]           mant_o,
  output logic                  zero_o,
  output logic                  nar_o
);

  logic [7:0]  ex;
  logic [22:0] fr;
  int unsigned lz;
  logic        found;

  always_comb begin
    sign_o = float_i[31];
    ex     = float_i[30:23];
    fr     = float_i[22:0];
    zero_o = (ex == 8'd0) && (fr == '0);
    nar_o  = (ex == 8'hFF);
    lz     = 0;
    found  = 1'b0;
    for (int i = 22; i >= 0; i--) begin
      if (!found && !fr[i]) lz++;
      else found = 1'b1;
    end
    if (ex == 8'd0) begin
      // subnormal: value = 0.f * 2^-126
      mant_o = {1'b0, fr} << (lz + 1);
      te_o   = -TEW'(126) - TEW'(lz + 1);
    end else begin
      mant_o = {1'b1, fr};
      te_o   = TEW'(ex) - TEW'(127);
    end
  end

endmodule
