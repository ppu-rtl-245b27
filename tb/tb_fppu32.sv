// Self-checking testbench of one FPPU lane built as posit<32,2>, the
// high-precision size (27 fraction bits, one lane per 32-bit register).
// A random stream of all eight operations is issued, mostly back to back.
// Operands are random codes mixed with zero, NaR, values near maxpos/minpos
// and pairs of close magnitude. Every result must arrive three cycles after
// its valid_i. Add, sub, mul, fma and float-to-posit must equal the
// correctly rounded reference (computed in double precision, which holds
// every posit<32,2> value and sum exactly; a 56-bit product is rounded once
// to 53 bits first, which can only matter within 2^-53 of a rounding
// boundary). Posit-to-float must be the binary32 nearest to the posit, ties
// to even (the posit<32,2> range 2^-120..2^120 lies inside binary32's).
// Division and 1/x use the same single Newton-Raphson step as the smaller
// sizes, which gives about 15 correct bits, far fewer than the 28-bit
// significand: a result must be the correctly rounded code, a neighbour of
// it, or within a relative error of 2^-14 of the exact quotient. The share of
// correctly rounded quotients and the worst relative error for quotients of
// magnitude 2^-16..2^16 (where the posit itself has 23 or more fraction
// bits) are reported. The 32-bit size is one the design is described as
// supporting; the operand mix and the division bound are this testbench's
// own.
module tb_fppu32;
  import ppu_pkg::*;
  import posit_ref_pkg::*;
  import fppu_ref_pkg::*;

  localparam int N = 32, ES = 2;

  int checks = 0, failures = 0;
  int n_op[8];
  int n_special = 0, n_sat = 0, n_b2b = 0, n_cancel = 0, n_div = 0, n_div_exact = 0;
  real worst_div = 0.0;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic rst, vi, vo;
  ppu_op_e op;
  logic [31:0] o1, res;
  logic [N-1:0] o2, o3;

  fppu #(.N(N), .ES(ES)) dut (.clk, .rst, .valid_i(vi), .op_i(op), .operand1_i(o1), .operand2_i(o2),
                             .operand3_i(o3), .valid_o(vo), .result_o(res));

  typedef struct { ppu_op_e op; longint unsigned want; bit approx; int cyc; logic [31:0] o1;
                   logic [N-1:0] o2, o3; real exact; } exp_t;
  exp_t q[$];
  int cyc = 0;

  function automatic logic [N-1:0] rnd_posit();
    int c = $urandom_range(0, 9);
    if (c == 0) return '0;
    if (c == 1) return 32'h8000_0000;
    if (c == 2) return 32'h7FFF_FFFF - 32'($urandom_range(0, 15));   // huge
    if (c == 3) return 32'($urandom_range(1, 16));                    // tiny
    return $urandom;
  endfunction

  // binary32 nearest to r, ties to even (r a normal binary32 magnitude)
  function automatic logic [31:0] float_rne(real r);
    real a, s, rem;
    int  ex;
    longint fl;
    if (r == 0.0) return 32'h0;
    a  = (r < 0.0) ? -r : r;
    ex = 0;
    while (a >= 2.0) begin a = a / 2.0; ex++; end
    while (a < 1.0)  begin a = a * 2.0; ex--; end
    s   = (a - 1.0) * 8388608.0;
    fl  = longint'($floor(s));
    rem = s - real'(fl);
    if (rem > 0.5 || (rem == 0.5 && fl[0])) fl++;
    if (fl == 64'd8388608) begin fl = 0; ex++; end
    return {(r < 0.0), 8'(ex + 127), 23'(fl)};
  endfunction

  always @(posedge clk) cyc <= cyc + 1;

  always @(negedge clk) if (!rst) begin
    if (vo) begin
      exp_t e;
      if (q.size() == 0) begin failures++; $display("FAIL unexpected valid_o"); end
      else begin
        e = q.pop_front();
        checks++;
        if (cyc - e.cyc != 3) begin
          failures++; $display("FAIL latency %0d cycles", cyc - e.cyc);
        end
        if (res == 32'h7FFF_FFFF || res == 32'h0000_0001 || res == 32'h8000_0001 || res == 32'hFFFF_FFFF)
          n_sat++;
        if (e.approx) begin
          real got, rel;
          n_div++;
          if (res == e.want[31:0]) n_div_exact++;
          got = posit_to_real(64'(res), N, ES);
          rel = (got - e.exact) / e.exact;
          if (rel < 0.0) rel = -rel;
          if (e.exact > -65536.0 && e.exact < 65536.0 && (e.exact > pow2(-16) || e.exact < -pow2(-16)) &&
              rel > worst_div)
            worst_div = rel;
          if (!near_code(64'(res), e.want, N) && (is_nar(64'(res), N) || rel > pow2(-14))) begin
            failures++;
            if (failures < 30) $display("FAIL %s %h %h: got %h want %h (rel %g)", e.op.name(), e.o1, e.o2, res, e.want, rel);
          end
        end else if (res != e.want[31:0]) begin
          failures++;
          if (failures < 30) $display("FAIL %s %h %h %h: got %h want %h", e.op.name(), e.o1, e.o2, e.o3, res, e.want);
        end
      end
    end else if (q.size() != 0 && cyc - q[0].cyc > 3) begin
      failures++; $display("FAIL missing valid_o"); void'(q.pop_front());
    end
  end

  initial begin
    exp_t e;
    bit prev_v;
    real v1, v2;
    rst = 1; vi = 0; op = OP_ADD; o1 = 0; o2 = 0; o3 = 0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst = 0;
    prev_v = 0;
    for (int i = 0; i < 30000; i++) begin
      @(negedge clk);
      vi = ($urandom_range(0, 5) != 0);
      if (vi) begin
        op = ppu_op_e'($urandom_range(0, 7));
        o1 = rnd_posit();
        o2 = rnd_posit();
        o3 = rnd_posit();
        if (op == OP_F2P) begin
          o1 = $urandom;
          if (i % 5 == 0) o1[30:23] = 8'($urandom_range(100, 150));
        end
        if ((op == OP_ADD || op == OP_SUB) && i % 4 == 0) begin
          o2 = o1 ^ 32'($urandom_range(0, 3));
          if (op == OP_ADD) o2 = ~o2 + 1'b1;
        end
        e.op = op; e.o1 = o1; e.o2 = o2; e.o3 = o3; e.cyc = cyc; e.exact = 0.0;
        e.want = fppu_expect(op, o1, 64'(o2), 64'(o3), N, ES, e.approx);
        v1 = posit_to_real(64'(o1), N, ES);
        v2 = posit_to_real(64'(o2), N, ES);
        if (op == OP_DIV && e.approx) e.exact = v1 / v2;
        if (op == OP_INV && e.approx) e.exact = 1.0 / v1;
        if (op == OP_P2F && !is_nar(64'(o2), N)) e.want = 64'(float_rne(v2));
        if (op != OP_F2P && op != OP_P2F && op != OP_FMADD &&
            (o1 == 0 || o1 == 32'h8000_0000 || o2 == 0 || o2 == 32'h8000_0000)) n_special++;
        if ((op == OP_ADD || op == OP_SUB) && e.want == 0 && o1 != 0) n_cancel++;
        n_op[op]++;
        if (prev_v) n_b2b++;
        q.push_back(e);
      end
      prev_v = vi;
    end
    @(negedge clk) vi = 0;
    repeat (6) @(negedge clk);
    foreach (n_op[i]) if (n_op[i] == 0) begin failures++; $display("FAIL op %0d never issued", i); end
    if (n_special == 0 || n_sat == 0 || n_b2b == 0 || n_cancel == 0 || n_div == 0) begin
      failures++; $display("FAIL mechanism missing");
    end
    $display("ops add=%0d sub=%0d mul=%0d div=%0d fma=%0d inv=%0d f2p=%0d p2f=%0d",
             n_op[0], n_op[1], n_op[2], n_op[3], n_op[4], n_op[5], n_op[6], n_op[7]);
    $display("special=%0d saturated=%0d back_to_back=%0d cancel=%0d", n_special, n_sat, n_b2b, n_cancel);
    $display("quotients=%0d correctly rounded=%0d (%0.2f %%), worst relative error %g (2^%0.1f)",
             n_div, n_div_exact, 100.0 * n_div_exact / n_div, worst_div, $ln(worst_div) / $ln(2.0));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
