// FIR multiplier.
//
// (-1)^s1 2^te1 (1.f1) * (-1)^s2 2^te2 (1.f2): the sign is s1 xor s2, the
// exponents add, and the significands are multiplied as integers. The
// product lies in [1,4); when it is 2 or more the exponent is incremented,
// otherwise the product is shifted up one place, so the result always has its
// hidden bit at the MSB. The full 2*MW-bit product is kept, so nothing is
// rounded here.
//
// Purely combinational. Follows the multiplication described for the FPPU.
module fppu_mul #(
  parameter int unsigned MW  = 12,
  parameter int unsigned TEW = 10
) (
  input  logic                  s1_i,
  input  logic signed [TEW-1:0] te1_i,
  input  logic [MW-1:0]         m1_i,
  input  logic                  s2_i,
  input  logic signed [TEW-1:0] te2_i,
  input  logic [MW-1:0]         m2_i,
  output logic                  s_o,
  output logic signed [TEW-1:0] te_o,
  output logic [2*MW-1:0]       m_o
);

  logic [2*MW-1:0] prod;

  always_comb begin
    prod = m1_i * m2_i;
    s_o  = s1_i ^ s2_i;
    if (prod[2*MW-1]) begin
      te_o = te1_i + te2_i + 1'b1;
      m_o  = prod;
    end else begin
      te_o = te1_i + te2_i;
      m_o  = prod << 1;
    end
  end

endmodule
