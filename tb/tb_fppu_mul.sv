// Self-checking testbench of fppu_mul (12-bit significands, posit<16,2>).
// Random FIR operands, corner significands 1.0 and 1.11..1 included. The
// product value must equal the exact real product, the hidden bit must be the
// MSB and the sign the XOR of the operand signs.
module tb_fppu_mul;
  import posit_ref_pkg::*;

  localparam int MW = 12, TEW = 10;
  int checks = 0, failures = 0, n_carry = 0;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic s1, s2, s;
  logic signed [TEW-1:0] te1, te2, te;
  logic [MW-1:0] m1, m2;
  logic [2*MW-1:0] m;

  fppu_mul #(.MW(MW), .TEW(TEW)) dut (.s1_i(s1), .te1_i(te1), .m1_i(m1), .s2_i(s2), .te2_i(te2), .m2_i(m2),
                                      .s_o(s), .te_o(te), .m_o(m));

  initial begin
    real want, got;
    for (int i = 0; i < 20000; i++) begin
      s1 = $urandom_range(0, 1); s2 = $urandom_range(0, 1);
      te1 = TEW'($signed($urandom_range(0, 120)) - 60);
      te2 = TEW'($signed($urandom_range(0, 120)) - 60);
      m1 = MW'($urandom); m1[MW-1] = 1'b1;
      m2 = MW'($urandom); m2[MW-1] = 1'b1;
      if (i == 0) begin m1 = {1'b1, {(MW-1){1'b0}}}; m2 = m1; end
      if (i == 1) begin m1 = '1; m2 = '1; end
      #1;
      want = real'(m1) * real'(m2) * pow2(int'(te1) + int'(te2) - 2 * (MW - 1));
      got  = real'(m) * pow2(int'(te) - (2 * MW - 1));
      if (te != te1 + te2) n_carry++;
      checks++;
      if (got != want || !m[2*MW-1] || s != (s1 ^ s2)) begin
        failures++;
        if (failures < 20) $display("FAIL %h*%h: got %g want %g", m1, m2, got, want);
      end
    end
    if (n_carry == 0) begin failures++; $display("FAIL product never reached 2"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
