// End-to-end testbench of ppu_top at its default configuration (posit<16,2>,
// XLEN 32, two SIMD lanes), driven with instruction words as the host core
// would issue them.
// A random stream of PADD, PSUB, PMUL, PDIV, PFMADD, PINV and the two
// conversions, plus non-posit and malformed words, is issued mostly back to
// back. Each lane's 16-bit field of rd is checked against the reference (exact,
// or a neighbouring code for quotients), conversions against lane 0, and
// valid_o / rd_addr_o must arrive exactly three cycles after issue. Malformed
// words must raise illegal_o and produce no result. Mechanisms counted (each
// must occur): every instruction, both lanes busy with different data, the
// special path, saturation, back-to-back issue, illegal words, ignored words.
module tb_ppu_top;
  import ppu_pkg::*;
  import posit_ref_pkg::*;
  import fppu_ref_pkg::*;

  localparam int N = 16, ES = 2, LANES = 2;

  int checks = 0, failures = 0;
  int n_op[8];
  int n_simd = 0, n_special = 0, n_sat = 0, n_b2b = 0, n_illegal = 0, n_ignored = 0, n_inexact = 0;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic rst, vi, vo, ill;
  logic [31:0] instr, rs1, rs2, rs3, rd;
  logic [4:0] a1, a2, a3, ard;

  ppu_top dut (.clk, .rst, .valid_i(vi), .instr_i(instr), .rs1_data_i(rs1), .rs2_data_i(rs2),
               .rs3_data_i(rs3), .rs1_addr_o(a1), .rs2_addr_o(a2), .rs3_addr_o(a3), .illegal_o(ill),
               .valid_o(vo), .rd_addr_o(ard), .rd_data_o(rd));

  typedef struct { ppu_op_e op; logic [31:0] want; bit approx; int cyc; logic [4:0] rd; } exp_t;
  exp_t q[$];
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  function automatic logic [31:0] encode(ppu_op_e op, logic [4:0] d, s1, s2, s3);
    case (op)
      OP_ADD:   return {7'b1100000, s2, s1, 3'b000, d, 7'b0001011};
      OP_SUB:   return {7'b1101010, s2, s1, 3'b001, d, 7'b0001011};
      OP_MUL:   return {7'b1100000, s2, s1, 3'b010, d, 7'b0001011};
      OP_DIV:   return {7'b1100000, s2, s1, 3'b100, d, 7'b0001011};
      OP_INV:   return {7'b1100000, s2, s1, 3'b011, d, 7'b0001011};
      OP_P2F:   return {7'b1100000, s2, s1, 3'b101, d, 7'b0001011};
      OP_F2P:   return {7'b1100000, s2, s1, 3'b110, d, 7'b0001011};
      default:  return {s3, 2'b00, s2, s1, 3'b000, d, 7'b0101011};
    endcase
  endfunction

  function automatic logic [15:0] rnd_posit();
    int c = $urandom_range(0, 9);
    if (c == 0) return '0;
    if (c == 1) return 16'h8000;
    if (c == 2) return 16'($urandom_range(16'h7FF0, 16'h7FFF));
    if (c == 3) return 16'($urandom_range(1, 16'h10));
    return 16'($urandom);
  endfunction

  always @(negedge clk) if (!rst) begin
    if (vo) begin
      exp_t e;
      if (q.size() == 0) begin failures++; $display("FAIL unexpected valid_o"); end
      else begin
        e = q.pop_front();
        checks++;
        if (cyc - e.cyc != 3 || ard != e.rd) begin
          failures++; $display("FAIL latency %0d / rd %0d want %0d", cyc - e.cyc, ard, e.rd);
        end
        for (int l = 0; l < LANES; l++)
          if (e.op != OP_P2F && (rd[l*N +: N] == 16'h7FFF || rd[l*N +: N] == 16'h0001)) n_sat++;
        if (e.op == OP_P2F || e.op == OP_F2P) begin
          if (rd != e.want) begin
            failures++; if (failures < 30) $display("FAIL %s got %h want %h", e.op.name(), rd, e.want);
          end
        end else begin
          for (int l = 0; l < LANES; l++) begin
            if (e.approx && rd[l*N +: N] != e.want[l*N +: N]) n_inexact++;
            if (e.approx ? !near_code(rd[l*N +: N], e.want[l*N +: N], N) : rd[l*N +: N] != e.want[l*N +: N]) begin
              failures++;
              if (failures < 30) $display("FAIL %s lane %0d got %h want %h", e.op.name(), l, rd[l*N +: N], e.want[l*N +: N]);
            end
          end
        end
      end
    end else if (q.size() != 0 && cyc - q[0].cyc > 3) begin
      failures++; $display("FAIL missing valid_o"); void'(q.pop_front());
    end
  end

  initial begin
    exp_t e;
    bit prev_v, ap;
    ppu_op_e op;
    logic [4:0] d;
    longint unsigned w;
    rst = 1; vi = 0; instr = 0; rs1 = 0; rs2 = 0; rs3 = 0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst = 0;
    prev_v = 0;
    for (int i = 0; i < 20000; i++) begin
      @(negedge clk);
      vi = ($urandom_range(0, 4) != 0);
      op = ppu_op_e'($urandom_range(0, 7));
      d  = 5'($urandom_range(1, 31));
      instr = encode(op, d, 5'($urandom), 5'($urandom), 5'($urandom));
      rs1 = {rnd_posit(), rnd_posit()};
      rs2 = {rnd_posit(), rnd_posit()};
      rs3 = {rnd_posit(), rnd_posit()};
      if (op == OP_F2P) begin
        rs1 = $urandom;
        if (i % 3 == 0) rs1[30:23] = 8'($urandom_range(100, 150));
      end
      if (i % 37 == 5) begin instr = $urandom; instr[6:0] = 7'b0110011; end                // host op
      if (i % 41 == 6) begin instr = encode(OP_ADD, d, 1, 2, 3); instr[31:25] = 7'b0000001; end // malformed
      #1;
      checks++;
      if (ill != (i % 41 == 6)) begin failures++; $display("FAIL illegal_o"); end
      if (vi && (i % 41 == 6)) n_illegal++;
      if (vi && (i % 37 == 5)) n_ignored++;
      if (vi && (i % 37 != 5) && (i % 41 != 6)) begin
        e.op = op; e.rd = d; e.cyc = cyc; e.want = '0; e.approx = 0;
        if (op == OP_P2F || op == OP_F2P) begin
          w = fppu_expect(op, rs1, 64'(rs2[15:0]), 64'(rs3[15:0]), N, ES, ap);
          e.want = 32'(w);
        end else begin
          for (int l = 0; l < LANES; l++) begin
            w = fppu_expect(op, 32'(rs1[l*N +: N]), 64'(rs2[l*N +: N]), 64'(rs3[l*N +: N]), N, ES, ap);
            e.want[l*N +: N] = N'(w);
            e.approx |= ap;
            if (op != OP_FMADD && (rs1[l*N +: N] == 0 || rs2[l*N +: N] == 0 ||
                rs1[l*N +: N] == 16'h8000 || rs2[l*N +: N] == 16'h8000)) n_special++;
          end
          if (e.want[15:0] != e.want[31:16] && e.want[15:0] != 0 && e.want[31:16] != 0) n_simd++;
        end
        n_op[op]++;
        if (prev_v) n_b2b++;
        q.push_back(e);
        prev_v = 1;
      end else prev_v = 0;
    end
    @(negedge clk) vi = 0;
    repeat (6) @(negedge clk);
    foreach (n_op[i]) if (n_op[i] == 0) begin failures++; $display("FAIL op %0d never issued", i); end
    if (n_simd == 0 || n_special == 0 || n_sat == 0 || n_b2b == 0 || n_illegal == 0 || n_ignored == 0) begin
      failures++; $display("FAIL mechanism missing");
    end
    if (q.size() != 0) begin failures++; $display("FAIL %0d results outstanding", q.size()); end
    $display("ops add=%0d sub=%0d mul=%0d div=%0d fma=%0d inv=%0d f2p=%0d p2f=%0d",
             n_op[0], n_op[1], n_op[2], n_op[3], n_op[4], n_op[5], n_op[6], n_op[7]);
    $display("simd=%0d special=%0d saturated=%0d back_to_back=%0d illegal=%0d ignored=%0d inexact_quotients=%0d",
             n_simd, n_special, n_sat, n_b2b, n_illegal, n_ignored, n_inexact);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
