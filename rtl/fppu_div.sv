// FIR divider: polynomial reciprocal, one Newton-Raphson round, multiply.
//
// The quotient of the significands m1/m2 is formed as m1 * (1/m2). With
// x = m2/2 in [0.5,1), the reciprocal is first approximated by
//   b = k1 - x;  c = x*b;  d = k2 - c;  e = d*b;  y = 4e
// (k1 = 1.45678..., k2 = 1.00092..., two multiplications), then refined by
// one Newton-Raphson step y1 = y*(2 - x*y), and finally q = m1*y1/2. All of
// it is unsigned fixed point with RF fraction bits, truncating. y1 never
// exceeds 1/x, so q < 2; a quotient below 1 is shifted up one place and the
// exponent te1-te2 decremented. The MO leading bits are returned with the OR
// of the rest as sticky. The result is an approximation: a small share of
// quotients round to a neighbour of the correctly rounded posit.
//
// Timing: two halves with a register between them (the FPPU's computation
// stage is split in two for this path). Operands presented in cycle t give
// the quotient in cycle t+1. The register has no reset (data only).
//
// The algorithm, constants and the two-stage split follow the design
// description; RF, truncation and where the cut falls (after x*y) are this
// design's choices.
module fppu_div
  import ppu_pkg::*;
#(
  parameter int unsigned MW  = 12,
  parameter int unsigned TEW = 10,
  parameter int unsigned MO  = 26,
  parameter int unsigned RF  = 2 * MW + 2
) (
  input  logic                  clk,
  input  logic                  s1_i,
  input  logic signed [TEW-1:0] te1_i,
  input  logic [MW-1:0]         m1_i,
  input  logic                  s2_i,
  input  logic signed [TEW-1:0] te2_i,
  input  logic [MW-1:0]         m2_i,
  output logic                  s_o,
  output logic signed [TEW-1:0] te_o,
  output logic [MO-1:0]         m_o,
  output logic                  sticky_o
);

  localparam logic [RF+1:0] K1  = (RF+2)'(longint'(RECIP_K1 * (2.0 ** RF)));
  localparam logic [RF+1:0] K2  = (RF+2)'(longint'(RECIP_K2 * (2.0 ** RF)));
  localparam logic [RF+1:0] TWO = (RF+2)'(2) << RF;
  localparam int unsigned   QW  = MW + RF + 2;

  // ---- first half: polynomial approximation and x*y ----
  logic [RF+1:0]     x, b, c, d, e, y, t, u;
  logic [2*RF+3:0]   p_xb, p_db, p_xy;

  always_comb begin
    x    = (RF+2)'(m2_i) << (RF - MW);
    b    = K1 - x;
    p_xb = x * b;
    c    = (RF+2)'(p_xb >> RF);
    d    = K2 - c;
    p_db = d * b;
    e    = (RF+2)'(p_db >> RF);
    y    = e << 2;
    p_xy = x * y;
    t    = (RF+2)'(p_xy >> RF);
    u    = TWO - t;
  end

  // ---- pipeline register ----
  logic                  s_q;
  logic signed [TEW-1:0] te_q;
  logic [MW-1:0]         m1_q;
  logic [RF+1:0]         y_q, u_q;

  always_ff @(posedge clk) begin
    s_q  <= s1_i ^ s2_i;
    te_q <= te1_i - te2_i;
    m1_q <= m1_i;
    y_q  <= y;
    u_q  <= u;
  end

  // ---- second half: Newton-Raphson product and quotient ----
  logic [2*RF+3:0] p_yu;
  logic [RF+1:0]   y1;
  logic [QW-1:0]   q, qn;
  logic [QW+MO-1:0] wide;

  always_comb begin
    p_yu = y_q * u_q;
    y1   = (RF+2)'(p_yu >> RF);
    q    = QW'(m1_q) * QW'(y1);
    // q / 2^(MW-1+RF) = 2 * quotient, in (1,4)
    s_o  = s_q;
    if (q[QW-2]) begin
      te_o = te_q;
      qn   = q << 1;
    end else begin
      te_o = te_q - 1'b1;
      qn   = q << 2;
    end
    wide     = {qn, {MO{1'b0}}};
    m_o      = wide[QW+MO-1 -: MO];
    sticky_o = |wide[QW-1:0];
  end

endmodule
