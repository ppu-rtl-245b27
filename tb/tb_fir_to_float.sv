// Self-checking testbench of fir_to_float (12-bit significand, as for
// posit<16,2>). Random FIR values over the posit<16,2> exponent range plus
// zero and NaR; the output word must be the exact binary32 of the value.
module tb_fir_to_float;
  import ppu_pkg::*;
  import posit_ref_pkg::*;

  localparam int MI = 12, TEW = 10;
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

  logic s, z, nr;
  logic signed [TEW-1:0] te;
  logic [MI-1:0] m;
  logic [31:0] f;

  fir_to_float #(.MI(MI), .TEW(TEW)) dut (.sign_i(s), .te_i(te), .mant_i(m), .zero_i(z), .nar_i(nr), .float_o(f));

  task automatic run_one(logic [31:0] want);
    #1;
    checks++;
    if (f !== want) begin
      failures++;
      if (failures < 20) $display("FAIL s=%0d te=%0d m=%h: got %h want %h", s, te, m, f, want);
    end
  endtask

  initial begin
    real v;
    z = 0; nr = 0;
    for (int i = 0; i < 20000; i++) begin
      s  = $urandom_range(0, 1);
      te = TEW'($signed($urandom_range(0, 120)) - 60);
      m  = MI'($urandom);
      m[MI-1] = 1'b1;
      v  = real'(m) * pow2(int'(te) - (MI - 1));
      run_one(real_to_float(s ? -v : v));
    end
    z = 1; run_one(32'h0);
    z = 0; nr = 1; run_one(32'h7FC0_0000);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
