// Self-checking testbench of one FPPU lane at its default posit<16,2>.
// A random stream of all eight operations is issued, mostly back to back,
// with random gaps. Operands are random codes mixed with zero, NaR, values
// near maxpos/minpos and pairs of close magnitude (cancellation). Every
// result must appear with valid_o exactly three cycles after its valid_i
// and match the reference: exactly for add, sub, mul, fma and the
// conversions; for div and 1/x either exactly or as a neighbouring code, the
// share of inexact quotients being reported and required below 10 %.
// Counted mechanisms (each must occur): every operation, the special
// (zero/NaR) path, saturation at maxpos/minpos, back-to-back issue, the
// cancellation of an add, inexact quotients.
module tb_fppu;
  import ppu_pkg::*;
  import posit_ref_pkg::*;
  import fppu_ref_pkg::*;

  localparam int N = 16, ES = 2;

  int checks = 0, failures = 0;
  int n_op[8];
  int n_special = 0, n_sat = 0, n_b2b = 0, n_cancel = 0, n_div = 0, n_div_wrong = 0;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic rst, vi, vo;
  ppu_op_e op;
  logic [31:0] o1, res;
  logic [N-1:0] o2, o3;

  fppu dut (.clk, .rst, .valid_i(vi), .op_i(op), .operand1_i(o1), .operand2_i(o2), .operand3_i(o3),
            .valid_o(vo), .result_o(res));

  typedef struct { ppu_op_e op; longint unsigned want; bit approx; int cyc; logic [31:0] o1;
                   logic [N-1:0] o2, o3; } exp_t;
  exp_t q[$];
  int cyc = 0;

  function automatic logic [N-1:0] rnd_posit();
    int c = $urandom_range(0, 9);
    if (c == 0) return '0;
    if (c == 1) return 16'h8000;
    if (c == 2) return 16'($urandom_range(16'h7FF0, 16'h7FFF));   // huge
    if (c == 3) return 16'($urandom_range(1, 16'h10));            // tiny
    return 16'($urandom);
  endfunction

  always @(posedge clk) cyc <= cyc + 1;

  // output checker
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
        if (e.op == OP_P2F) begin
          if (res != e.want[31:0]) begin
            failures++; if (failures < 30) $display("FAIL P2F %h: got %h want %h", e.o2, res, e.want);
          end
        end else begin
          if (res[N-1:0] == 16'h7FFF || res[N-1:0] == 16'h0001 ||
              res[N-1:0] == 16'h8001 || res[N-1:0] == 16'hFFFF) n_sat++;
          if (e.approx) begin
            n_div++;
            if (res[N-1:0] != e.want[N-1:0]) n_div_wrong++;
          end
          if (res[31:N] != 0 || (e.approx ? !near_code(res[N-1:0], e.want, N) : res[N-1:0] != e.want[N-1:0])) begin
            failures++;
            if (failures < 30) $display("FAIL %s %h %h %h: got %h want %h", e.op.name(), e.o1, e.o2, e.o3, res, e.want);
          end
        end
      end
    end else if (q.size() != 0 && cyc - q[0].cyc > 3) begin
      failures++; $display("FAIL missing valid_o"); void'(q.pop_front());
    end
  end

  initial begin
    exp_t e;
    bit prev_v;
    rst = 1; vi = 0; op = OP_ADD; o1 = 0; o2 = 0; o3 = 0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst = 0;
    prev_v = 0;
    for (int i = 0; i < 60000; i++) begin
      @(negedge clk);
      vi = ($urandom_range(0, 5) != 0);
      if (vi) begin
        op = ppu_op_e'($urandom_range(0, 7));
        o1 = 32'(rnd_posit());
        o2 = rnd_posit();
        o3 = rnd_posit();
        if (op == OP_F2P) begin
          o1 = $urandom;
          if (i % 5 == 0) o1[30:23] = 8'($urandom_range(100, 150));
        end
        if ((op == OP_ADD || op == OP_SUB) && i % 4 == 0) begin
          o2 = o1[N-1:0] ^ 16'($urandom_range(0, 3));           // close magnitudes
          if (op == OP_ADD) o2 = ~o2 + 1'b1;
        end
        e.op = op; e.o1 = o1; e.o2 = o2; e.o3 = o3; e.cyc = cyc;
        e.want = fppu_expect(op, o1, 64'(o2), 64'(o3), N, ES, e.approx);
        if (op != OP_F2P && op != OP_P2F && op != OP_FMADD &&
            (o1[N-1:0] == 0 || o1[N-1:0] == 16'h8000 || o2 == 0 || o2 == 16'h8000)) n_special++;
        if ((op == OP_ADD || op == OP_SUB) && e.want == 0 && o1[N-1:0] != 0) n_cancel++;
        n_op[op]++;
        if (prev_v) n_b2b++;
        q.push_back(e);
      end
      prev_v = vi;
    end
    @(negedge clk) vi = 0;
    repeat (6) @(negedge clk);
    foreach (n_op[i]) if (n_op[i] == 0) begin failures++; $display("FAIL op %0d never issued", i); end
    if (n_special == 0 || n_sat == 0 || n_b2b == 0 || n_cancel == 0 || n_div_wrong == 0) begin
      failures++; $display("FAIL mechanism missing");
    end
    if (n_div_wrong * 10 > n_div) begin
      failures++; $display("FAIL too many inexact quotients");
    end
    $display("ops add=%0d sub=%0d mul=%0d div=%0d fma=%0d inv=%0d f2p=%0d p2f=%0d",
             n_op[0], n_op[1], n_op[2], n_op[3], n_op[4], n_op[5], n_op[6], n_op[7]);
    $display("special=%0d saturated=%0d back_to_back=%0d cancel=%0d quotients=%0d inexact=%0d (%0.2f %%)",
             n_special, n_sat, n_b2b, n_cancel, n_div, n_div_wrong, 100.0 * n_div_wrong / n_div);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
