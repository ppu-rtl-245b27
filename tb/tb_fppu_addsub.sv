// Self-checking testbench of fppu_addsub (24-bit significands, 26-bit
// result, as used in the FPPU). Random operands with close and far
// exponents, both operations and signs, cancellation, a zero second operand.
// Checks: zero flag for an exact zero sum; otherwise the hidden bit is the
// MSB, the sign is right, an exact result (sticky clear) equals the real sum,
// and an inexact one lies within one result LSB of it.
module tb_fppu_addsub;
  import posit_ref_pkg::*;

  localparam int MI = 24, TEW = 10, MO = 26;
  int checks = 0, failures = 0;
  int n_cancel = 0, n_far = 0, n_carry = 0;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic s1, s2, sub, z2, s, st, z;
  logic signed [TEW-1:0] te1, te2, te;
  logic [MI-1:0] m1, m2;
  logic [MO-1:0] m;

  fppu_addsub #(.MI(MI), .TEW(TEW), .MO(MO)) dut (
    .s1_i(s1), .te1_i(te1), .m1_i(m1), .s2_i(s2), .te2_i(te2), .m2_i(m2), .zero2_i(z2), .sub_i(sub),
    .s_o(s), .te_o(te), .m_o(m), .sticky_o(st), .zero_o(z));

  initial begin
    real a, b, want, got, ulp;
    for (int i = 0; i < 30000; i++) begin
      s1 = $urandom_range(0, 1); s2 = $urandom_range(0, 1); sub = $urandom_range(0, 1);
      te1 = TEW'($signed($urandom_range(0, 40)) - 20);
      te2 = (i % 3 == 0) ? te1 + TEW'($signed($urandom_range(0, 2)) - 1)
                         : TEW'($signed($urandom_range(0, 40)) - 20);
      m1 = MI'($urandom); m1[MI-1] = 1'b1;
      m2 = MI'($urandom); m2[MI-1] = 1'b1;
      if (i % 50 == 7) begin m2 = m1; te2 = te1; end     // exact cancellation
      z2 = (i % 101 == 9);
      #1;
      a = real'(m1) * pow2(int'(te1) - (MI - 1)); if (s1) a = -a;
      b = real'(m2) * pow2(int'(te2) - (MI - 1)); if (s2 ^ sub) b = -b;
      if (z2) b = 0.0;
      want = a + b;
      checks++;
      if (want == 0.0) begin
        n_cancel++;
        if (!z) begin failures++; $display("FAIL zero sum not flagged"); end
      end else begin
        got = real'(m) * pow2(int'(te) - (MO - 1)); if (s) got = -got;
        ulp = pow2(int'(te) - (MO - 1));
        if (te > te1 && te > te2) n_carry++;
        if ((te1 - te2 > MI + 1) || (te2 - te1 > MI + 1)) n_far++;
        if (z || !m[MO-1] || ((want < 0.0) != s) ||
            (!st && got != want) || (st && (got - want > ulp || want - got > ulp))) begin
          failures++;
          if (failures < 20) $display("FAIL %g + %g: got %g st=%0d want %g", a, b, got, st, want);
        end
      end
    end
    if (n_cancel == 0 || n_far == 0 || n_carry == 0) begin
      failures++; $display("FAIL coverage cancel=%0d far=%0d carry=%0d", n_cancel, n_far, n_carry);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
