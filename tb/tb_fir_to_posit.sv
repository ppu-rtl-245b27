// Self-checking testbench of fir_to_posit (posit<16,2>, 26-bit significand).
// Random FIR values over and beyond the posit range, with and without a
// sticky bit, plus exact ties, zero and NaR. The expected code is the
// reference rounding of the real value; a sticky bit is modelled as a
// quarter of the input LSB added to the magnitude.
module tb_fir_to_posit;
  import ppu_pkg::*;
  import posit_ref_pkg::*;

  localparam int N = 16, ES = 2;
  localparam int MI = norm_width(N, ES), TEW = te_width(N, ES);

  int checks = 0, failures = 0;
  int n_sat = 0, n_tie = 0;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic s, st, z, nr;
  logic signed [TEW-1:0] te;
  logic [MI-1:0] m;
  logic [N-1:0] p;

  fir_to_posit #(.N(N), .ES(ES)) dut (.sign_i(s), .te_i(te), .mant_i(m), .sticky_i(st),
                                      .zero_i(z), .nar_i(nr), .posit_o(p));

  task automatic run_one();
    real v;
    longint unsigned want;
    #1;
    v = (real'(m) + (st ? 0.25 : 0.0)) * pow2(int'(te) - (MI - 1));
    if (s) v = -v;
    if (nr) want = 64'h8000;
    else if (z) want = 0;
    else want = real_to_posit(v, N, ES);
    checks++;
    if (want == 64'h7FFF || want == 64'h0001 || want == 64'h8001 || want == 64'hFFFF) n_sat++;
    if (p != N'(want)) begin
      failures++;
      if (failures < 20) $display("FAIL s=%0d te=%0d m=%h st=%0d: got %h want %h", s, te, m, st, p, want);
    end
  endtask

  initial begin
    z = 0; nr = 0;
    for (int i = 0; i < 30000; i++) begin
      s  = $urandom_range(0, 1);
      te = TEW'($signed($urandom_range(0, 160)) - 80);
      m  = {1'b1, MI'($urandom) ^ (MI'($urandom) << 13)} ;
      m[MI-1] = 1'b1;
      st = $urandom_range(0, 1);
      run_one();
    end
    // exact ties: significand with only the bit right below a posit
    // fraction LSB set (regime length 2 => 11 fraction bits)
    for (int i = 0; i < 2000; i++) begin
      s  = $urandom_range(0, 1);
      te = TEW'($signed($urandom_range(0, 15)) - 8);
      m  = '0;
      m[MI-1] = 1'b1;
      m[MI-2 -: 11] = 11'($urandom);
      m[MI-13] = 1'b1;
      st = 1'b0;
      n_tie++;
      run_one();
    end
    s = 0; te = 0; m = '1; st = 0;
    z = 1; run_one();
    z = 0; nr = 1; run_one();
    nr = 0;
    if (n_sat == 0) begin failures++; $display("FAIL no saturation case seen"); end
    $display("saturated=%0d ties=%0d", n_sat, n_tie);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
