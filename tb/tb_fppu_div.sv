// Self-checking testbench of fppu_div (12-bit significands, posit<16,2>).
// Operands are applied one per cycle; each quotient is checked one cycle
// later (the divider's latency) against the exact real quotient. The
// reciprocal is approximate, so the relative error must stay below 2^-14 (about 2^-15 is reached at x = 0.5),
// still several bits finer than the 12-bit significand; the sign and the
// normalisation (hidden bit at MSB) must be exact.
module tb_fppu_div;
  import posit_ref_pkg::*;

  localparam int MW = 12, TEW = 10, MO = 26;
  int checks = 0, failures = 0;
  real worst = 0.0;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic s1, s2, s, st;
  logic signed [TEW-1:0] te1, te2, te;
  logic [MW-1:0] m1, m2;
  logic [MO-1:0] m;

  fppu_div #(.MW(MW), .TEW(TEW), .MO(MO)) dut (
    .clk, .s1_i(s1), .te1_i(te1), .m1_i(m1), .s2_i(s2), .te2_i(te2), .m2_i(m2),
    .s_o(s), .te_o(te), .m_o(m), .sticky_o(st));

  initial begin
    real want, got, rel, prev_want;
    bit  prev_s, have_prev;
    have_prev = 0;
    for (int i = 0; i < 20001; i++) begin
      @(negedge clk);
      // result of the operands applied in the previous cycle
      if (have_prev) begin
        got = real'(m) * pow2(int'(te) - (MO - 1));
        rel = (got - prev_want) / prev_want; if (rel < 0.0) rel = -rel;
        if (rel > worst) worst = rel;
        checks++;
        if (rel > pow2(-14) || !m[MO-1] || s != prev_s) begin
          failures++;
          if (failures < 20) $display("FAIL got %g want %g rel %g", got, prev_want, rel);
        end
      end
      s1 = $urandom_range(0, 1); s2 = $urandom_range(0, 1);
      te1 = TEW'($signed($urandom_range(0, 60)) - 30);
      te2 = TEW'($signed($urandom_range(0, 60)) - 30);
      m1 = MW'($urandom); m1[MW-1] = 1'b1;
      m2 = MW'($urandom); m2[MW-1] = 1'b1;
      if (i % 7 == 0) m2 = m1;                                   // quotient exactly 1
      if (i % 11 == 0) m2 = {1'b1, {(MW-1){1'b0}}};              // divisor 1.0 (x = 0.5)
      prev_want = real'(m1) / real'(m2) * pow2(int'(te1) - int'(te2));
      prev_s = s1 ^ s2;
      have_prev = 1;
    end
    $display("worst relative error %g", worst);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
