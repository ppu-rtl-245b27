// Self-checking testbench of input_conditioning (posit<16,2> codes).
// Operands are drawn from zero, NaR and random codes for every operation;
// the expected special flag and result come from the posit rules for
// zero and NaR written out below.
module tb_input_conditioning;
  import ppu_pkg::*;

  localparam logic [15:0] NAR = 16'h8000;
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

  ppu_op_e op;
  logic [15:0] p1, p2, p3, res;
  logic sp;

  input_conditioning #(.N(16)) dut (.op_i(op), .p1_i(p1), .p2_i(p2), .p3_i(p3),
                                    .special_o(sp), .special_res_o(res));

  function automatic logic [15:0] pick();
    int c = $urandom_range(0, 3);
    if (c == 0) return 16'h0;
    if (c == 1) return NAR;
    return 16'($urandom_range(1, 16'h7FFF)) ^ (($urandom_range(0, 1) != 0) ? 16'hFFFF : 16'h0);
  endfunction

  initial begin
    bit want_sp;
    logic [15:0] want;
    for (int i = 0; i < 20000; i++) begin
      op = ppu_op_e'($urandom_range(0, 7));
      p1 = pick(); p2 = pick(); p3 = pick();
      if (p1 == NAR + 16'hFFFF) p1 = 16'h1;
      #1;
      want_sp = 0; want = 0;
      case (op)
        OP_ADD: if (p1 == NAR || p2 == NAR) {want_sp, want} = {1'b1, NAR};
                else if (p2 == 0) {want_sp, want} = {1'b1, p1};
                else if (p1 == 0) {want_sp, want} = {1'b1, p2};
        OP_SUB: if (p1 == NAR || p2 == NAR) {want_sp, want} = {1'b1, NAR};
                else if (p2 == 0) {want_sp, want} = {1'b1, p1};
                else if (p1 == 0) {want_sp, want} = {1'b1, 16'(-p2)};
        OP_MUL: if (p1 == NAR || p2 == NAR) {want_sp, want} = {1'b1, NAR};
                else if (p1 == 0 || p2 == 0) {want_sp, want} = {1'b1, 16'h0};
        OP_DIV: if (p1 == NAR || p2 == NAR || p2 == 0) {want_sp, want} = {1'b1, NAR};
                else if (p1 == 0) {want_sp, want} = {1'b1, 16'h0};
        OP_INV: if (p1 == NAR || p1 == 0) {want_sp, want} = {1'b1, NAR};
        OP_FMADD: if (p1 == NAR || p2 == NAR || p3 == NAR) {want_sp, want} = {1'b1, NAR};
                  else if (p1 == 0 || p2 == 0) {want_sp, want} = {1'b1, p3};
        default: ;
      endcase
      checks++;
      if (sp != want_sp || (want_sp && res != want)) begin
        failures++;
        if (failures < 20) $display("FAIL op=%s %h %h %h: got %0d/%h want %0d/%h", op.name(), p1, p2, p3, sp, res, want_sp, want);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
