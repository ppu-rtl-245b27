// Input conditioning: special-case detection of the FPPU operands.
//
// Looks at the raw posit operands and the operation and decides whether the
// result is fixed by a special operand (zero or NaR), so the arithmetic path
// can be bypassed. When special_o is set, special_res_o is the final posit:
//   any NaR operand -> NaR; ADD: x+0 = x, 0+y = y; SUB: x-0 = x, 0-y = -y;
//   MUL: a zero factor -> 0; DIV: x/0 -> NaR, 0/y -> 0; INV: 1/0 -> NaR;
//   FMADD: a zero factor -> p3.
// p1*p2 + 0 is left to the adder. The conversions never take this path (their zero/NaR handling is in the
// float encoder/decoder).
//
// Purely combinational. The block and its "special" output are part of the
// described design; the case list follows the posit standard.
module input_conditioning
  import ppu_pkg::*;
#(
  parameter int unsigned N  = 16
) (
  input  ppu_op_e      op_i,
  input  logic [N-1:0] p1_i,
  input  logic [N-1:0] p2_i,
  input  logic [N-1:0] p3_i,
  output logic         special_o,
  output logic [N-1:0] special_res_o
);

  localparam logic [N-1:0] NAR = {1'b1, {(N-1){1'b0}}};

  logic z1, z2, n1, n2, n3;

  always_comb begin
    z1 = (p1_i == '0);  n1 = (p1_i == NAR);
    z2 = (p2_i == '0);  n2 = (p2_i == NAR);
    n3 = (p3_i == NAR);
    special_o     = 1'b0;
    special_res_o = '0;
    unique case (op_i)
      OP_ADD: begin
        if (n1 || n2)  begin special_o = 1'b1; special_res_o = NAR;  end
        else if (z2)   begin special_o = 1'b1; special_res_o = p1_i; end
        else if (z1)   begin special_o = 1'b1; special_res_o = p2_i; end
      end
      OP_SUB: begin
        if (n1 || n2)  begin special_o = 1'b1; special_res_o = NAR;  end
        else if (z2)   begin special_o = 1'b1; special_res_o = p1_i; end
        else if (z1)   begin special_o = 1'b1; special_res_o = ~p2_i + 1'b1; end
      end
      OP_MUL: begin
        if (n1 || n2)      begin special_o = 1'b1; special_res_o = NAR; end
        else if (z1 || z2) begin special_o = 1'b1; special_res_o = '0;  end
      end
      OP_DIV: begin
        if (n1 || n2 || z2) begin special_o = 1'b1; special_res_o = NAR; end
        else if (z1)        begin special_o = 1'b1; special_res_o = '0;  end
      end
      OP_INV: begin
        if (n1 || z1) begin special_o = 1'b1; special_res_o = NAR; end
      end
      OP_FMADD: begin
        if (n1 || n2 || n3) begin special_o = 1'b1; special_res_o = NAR;  end
        else if (z1 || z2)  begin special_o = 1'b1; special_res_o = p3_i; end
      end
      default: ;
    endcase
  end

endmodule
