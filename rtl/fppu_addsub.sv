// FIR adder / subtractor (also the accumulate step of the fused multiply-add).
//
// The operand of larger magnitude is taken as p1 (the two are swapped when
// needed), b = te1 - te2 >= 0, and the smaller significand is shifted right
// by b into a window MI+1 bits wider than the significands. If it is shifted
// out completely it is replaced by a single sticky 1 in the window's LSB, far
// below any rounding position, so the sign and rounding of the result stay
// right. The significands are added (same signs) or subtracted (different
// signs). A carry out of [1,2) moves the exponent up by one; after a
// subtraction the leading zeros are counted and the result is shifted left
// and te1 reduced by that count. The MO most significant bits are returned,
// the OR of the bits below them as sticky_o. A zero second operand (flag
// zero2_i) returns the first unchanged. An exact zero sum sets zero_o.
//
// Purely combinational. The swap/align/normalise flow follows the design
// description; the window width and the sticky-LSB trick are this design's.
module fppu_addsub #(
  parameter int unsigned MI  = 24,
  parameter int unsigned TEW = 10,
  parameter int unsigned MO  = 26
) (
  input  logic                  s1_i,
  input  logic signed [TEW-1:0] te1_i,
  input  logic [MI-1:0]         m1_i,
  input  logic                  s2_i,
  input  logic signed [TEW-1:0] te2_i,
  input  logic [MI-1:0]         m2_i,
  input  logic                  zero2_i,
  input  logic                  sub_i,
  output logic                  s_o,
  output logic signed [TEW-1:0] te_o,
  output logic [MO-1:0]         m_o,
  output logic                  sticky_o,
  output logic                  zero_o
);

  localparam int unsigned W = 2 * MI + 2;   // carry | MI significand | MI+1 window

  logic                  s2e, swap, sa, sb;
  logic signed [TEW-1:0] tea, teb;
  logic [MI-1:0]         ma, mb;
  logic [TEW:0]          diff;
  logic [W-1:0]          ax, bx, sum, norm;
  logic [W+MO-1:0]       wide;
  int unsigned           lz;
  logic                  found;

  always_comb begin
    s2e  = s2_i ^ sub_i;
    swap = !zero2_i && ((te2_i > te1_i) || ((te2_i == te1_i) && (m2_i > m1_i)));
    sa   = swap ? s2e   : s1_i;
    tea  = swap ? te2_i : te1_i;
    ma   = swap ? m2_i  : m1_i;
    sb   = swap ? s1_i  : s2e;
    teb  = swap ? te1_i : te2_i;
    mb   = swap ? m1_i  : m2_i;
    diff = (TEW+1)'(tea) - (TEW+1)'(teb);
    ax   = {1'b0, ma, {(MI+1){1'b0}}};
    if (zero2_i)                  bx = '0;
    else if (diff > (TEW+1)'(MI + 1)) bx = W'(1);   // fully shifted out: sticky
    else                          bx = {1'b0, mb, {(MI+1){1'b0}}} >> diff;
    sum  = (sa == sb) ? (ax + bx) : (ax - bx);
    lz    = 0;
    found = 1'b0;
    for (int i = W - 1; i >= 0; i--) begin
      if (!found && !sum[i]) lz++;
      else found = 1'b1;
    end
    norm   = sum << lz;
    zero_o = (sum == '0);
    s_o    = sa;
    te_o   = tea + TEW'(1) - TEW'(lz);
    // pad on the right so MO may exceed W as well
    wide     = {norm, {MO{1'b0}}};
    m_o      = wide[W+MO-1 -: MO];
    sticky_o = |wide[W-1:0];
  end

endmodule
