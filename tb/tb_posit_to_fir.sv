// Self-checking testbench of posit_to_fir.
// Every code of posit<16,2> and of posit<8,0> is decoded; the value
// (-1)^s * 2^te * mant/2^FW rebuilt from the FIR fields must equal the value
// of the reference decoder, the hidden bit must be set and the zero/NaR flags
// must match.
module tb_posit_to_fir;
  import ppu_pkg::*;
  import posit_ref_pkg::*;

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

  localparam int FWA = frac_width(16, 2), TWA = te_width(16, 2);
  localparam int FWB = frac_width(8, 0),  TWB = te_width(8, 0);

  logic [15:0] pa;  logic sa, za, na;  logic signed [TWA-1:0] tea;  logic [FWA:0] ma;
  logic [7:0]  pb;  logic sb, zb, nb;  logic signed [TWB-1:0] teb;  logic [FWB:0] mb;

  posit_to_fir #(.N(16), .ES(2)) dut_a (.posit_i(pa), .sign_o(sa), .te_o(tea), .mant_o(ma), .zero_o(za), .nar_o(na));
  posit_to_fir #(.N(8),  .ES(0)) dut_b (.posit_i(pb), .sign_o(sb), .te_o(teb), .mant_o(mb), .zero_o(zb), .nar_o(nb));

  task automatic check_one(int n, int es, longint unsigned p, bit s, int te, longint unsigned m,
                           int fw, bit z, bit nr);
    real want, got;
    checks++;
    want = posit_to_real(p, n, es);
    if (p == 0) begin
      if (!z || nr) begin failures++; $display("FAIL p<%0d,%0d> %h zero flag", n, es, p); end
    end else if (is_nar(p, n)) begin
      if (!nr || z) begin failures++; $display("FAIL p<%0d,%0d> %h nar flag", n, es, p); end
    end else begin
      got = real'(m) * pow2(te - fw);
      if (s) got = -got;
      if (z || nr || got != want || m[fw] != 1'b1) begin
        failures++;
        if (failures < 20)
          $display("FAIL p<%0d,%0d> %h: got s=%0d te=%0d m=%h (%g) want %g", n, es, p, s, te, m, got, want);
      end
    end
  endtask

  initial begin
    for (int i = 0; i < 65536; i++) begin
      pa = 16'(i);
      pb = 8'(i);
      #1;
      check_one(16, 2, pa, sa, int'(tea), ma, FWA, za, na);
      if (i < 256) check_one(8, 0, pb, sb, int'(teb), mb, FWB, zb, nb);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
