// Self-checking testbench of float_to_fir.
// Random normal and subnormal binary32 words, zeros, infinities and NaNs.
// The FIR value mant * 2^(te-23) must equal the reference value of the word,
// with the hidden bit set; Inf/NaN must give NaR and +-0 must give zero.
module tb_float_to_fir;
  import ppu_pkg::*;
  import posit_ref_pkg::*;

  localparam int TEW = 10;
  int checks = 0, failures = 0;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [31:0] f;
  logic s, z, nr;
  logic signed [TEW-1:0] te;
  logic [23:0] m;

  float_to_fir #(.TEW(TEW)) dut (.float_i(f), .sign_o(s), .te_o(te), .mant_o(m), .zero_o(z), .nar_o(nr));

  task automatic run_one();
    real want, got;
    #1;
    checks++;
    if (f[30:23] == 8'hFF) begin
      if (!nr) begin failures++; $display("FAIL %h not NaR", f); end
    end else if (f[30:0] == 0) begin
      if (!z || nr) begin failures++; $display("FAIL %h not zero", f); end
    end else begin
      want = float_to_real(f);
      got  = real'(m) * pow2(int'(te) - 23);
      if (s) got = -got;
      if (got != want || !m[23] || z || nr) begin
        failures++;
        if (failures < 20) $display("FAIL %h: got %g want %g", f, got, want);
      end
    end
  endtask

  initial begin
    for (int i = 0; i < 20000; i++) begin
      f = $urandom;
      if (i % 4 == 1) f[30:23] = 8'h00;    // subnormal
      if (i % 97 == 3) f[30:23] = 8'hFF;   // Inf / NaN
      if (i % 89 == 5) f[30:0] = '0;       // zero
      run_one();
    end
    f = 32'h0000_0001; run_one();          // smallest subnormal
    f = 32'h7F7F_FFFF; run_one();          // largest normal
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
