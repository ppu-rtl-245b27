// Reference results of the FPPU operations, for the unit and system
// testbenches. Built on posit_ref_pkg: operands are decoded to reals, the
// operation is done in double precision and the result rounded to
// posit<n,es> (or to binary32 for the posit-to-float conversion).
// For DIV and INV the hardware result may also be a neighbouring code of the
// correctly rounded one (approx = 1), as the divider's reciprocal is an
// approximation.
package fppu_ref_pkg;
  import ppu_pkg::*;
  import posit_ref_pkg::*;

  function automatic longint unsigned fppu_expect(ppu_op_e op, logic [31:0] op1, longint unsigned p2,
                                                  longint unsigned p3, int n, int es, output bit approx);
    longint unsigned p1, nar;
    real v1, v2, v3;
    bit  n1, n2, n3;
    p1  = op1 & pmask(n);
    nar = 64'd1 << (n - 1);
    n1 = is_nar(p1, n); n2 = is_nar(p2, n); n3 = is_nar(p3, n);
    v1 = posit_to_real(p1, n, es);
    v2 = posit_to_real(p2, n, es);
    v3 = posit_to_real(p3, n, es);
    approx = 0;
    case (op)
      OP_ADD:   return (n1 || n2) ? nar : real_to_posit(v1 + v2, n, es);
      OP_SUB:   return (n1 || n2) ? nar : real_to_posit(v1 - v2, n, es);
      OP_MUL:   return (n1 || n2) ? nar : real_to_posit(v1 * v2, n, es);
      OP_FMADD: return (n1 || n2 || n3) ? nar : real_to_posit(v1 * v2 + v3, n, es);
      OP_DIV: begin
        if (n1 || n2 || v2 == 0.0) return nar;
        approx = (v1 != 0.0);
        return real_to_posit(v1 / v2, n, es);
      end
      OP_INV: begin
        if (n1 || v1 == 0.0) return nar;
        approx = 1;
        return real_to_posit(1.0 / v1, n, es);
      end
      OP_F2P: begin
        if (op1[30:23] == 8'hFF) return nar;
        return real_to_posit(float_to_real(op1), n, es);
      end
      default: begin  // OP_P2F
        if (n2) return 64'h7FC0_0000;
        return real_to_float(v2);
      end
    endcase
  endfunction

  // a result that is the correctly rounded code or one of its two neighbours
  function automatic bit near_code(longint unsigned got, longint unsigned want, int n);
    longint d;
    if (got == want) return 1;
    if (is_nar(got, n) || is_nar(want, n)) return 0;
    d = longint'((got - want) & pmask(n));
    return (d == 1) || (d == longint'(pmask(n)));
  endfunction
endpackage
