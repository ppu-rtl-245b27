// Self-checking testbench of ppu_instr_decoder.
// Every posit encoding is presented with random register fields and must
// decode to its operation and fields; random other funct7/funct3 values in
// the two posit opcode spaces must be flagged illegal; other opcodes must be
// ignored.
module tb_ppu_instr_decoder;
  import ppu_pkg::*;

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

  logic [31:0] instr;
  logic is_p, ill;
  ppu_op_e op;
  logic [4:0] rs1, rs2, rs3, rd;

  ppu_instr_decoder dut (.instr_i(instr), .is_posit_o(is_p), .illegal_o(ill), .op_o(op),
                         .rs1_o(rs1), .rs2_o(rs2), .rs3_o(rs3), .rd_o(rd));

  // encoding table: funct7, funct3, opcode, op
  typedef struct { logic [6:0] f7; logic [2:0] f3; logic [6:0] opc; ppu_op_e op; } enc_t;
  enc_t tab[7] = '{
    '{7'b1100000, 3'b000, 7'b0001011, OP_ADD},
    '{7'b1101010, 3'b001, 7'b0001011, OP_SUB},
    '{7'b1100000, 3'b010, 7'b0001011, OP_MUL},
    '{7'b1100000, 3'b100, 7'b0001011, OP_DIV},
    '{7'b1100000, 3'b011, 7'b0001011, OP_INV},
    '{7'b1100000, 3'b101, 7'b0001011, OP_P2F},
    '{7'b1100000, 3'b110, 7'b0001011, OP_F2P}
  };

  function automatic bit legal(logic [31:0] w);
    if (w[6:0] == 7'b0101011) return (w[14:12] == 3'b000) && (w[26:25] == 2'b00);
    foreach (tab[j]) if (w[31:25] == tab[j].f7 && w[14:12] == tab[j].f3 && w[6:0] == tab[j].opc) return 1;
    return 0;
  endfunction

  initial begin
    logic [4:0] a, b, c, d;
    for (int i = 0; i < 4000; i++) begin
      a = 5'($urandom); b = 5'($urandom); c = 5'($urandom); d = 5'($urandom);
      if (i % 8 < 7) instr = {tab[i % 8].f7, b, a, tab[i % 8].f3, d, tab[i % 8].opc};
      else           instr = {c, 2'b00, b, a, 3'b000, d, 7'b0101011};
      #1;
      checks++;
      if (!is_p || ill || rs1 != a || rs2 != b || rd != d ||
          op != ((i % 8 < 7) ? tab[i % 8].op : OP_FMADD) || ((i % 8 == 7) && rs3 != c)) begin
        failures++;
        if (failures < 20) $display("FAIL %h: is=%0d ill=%0d op=%s", instr, is_p, ill, op.name());
      end
      // random word in the posit opcode spaces, or any other opcode
      instr = $urandom;
      if (i % 3 == 0) instr[6:0] = 7'b0001011;
      if (i % 3 == 1) instr[6:0] = 7'b0101011;
      #1;
      checks++;
      if (is_p != legal(instr) ||
          ill != (!legal(instr) && (instr[6:0] == 7'b0001011 || instr[6:0] == 7'b0101011))) begin
        failures++;
        if (failures < 20) $display("FAIL random %h: is=%0d ill=%0d", instr, is_p, ill);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
