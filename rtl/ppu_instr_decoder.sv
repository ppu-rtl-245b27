// Posit instruction decoder (the addition to the host core's decoder).
//
// Recognises the R-type posit instructions in the custom-0 (0001011) and
// custom-1 (0101011) opcode spaces and turns them into an FPPU operation plus
// register addresses:
//   funct7   funct3 opcode    op
//   1100000  000    0001011   PADD   -> OP_ADD
//   1101010  001    0001011   PSUB   -> OP_SUB
//   1100000  010    0001011   PMUL   -> OP_MUL
//   1100000  100    0001011   PDIV   -> OP_DIV
//   rs3|00   000    0101011   PFMADD -> OP_FMADD  (rs3 = instr[31:27])
//   1100000  011    0001011   PINV   -> OP_INV    (this design's encoding)
//   1100000  101    0001011   PCVT.S.P -> OP_P2F  (this design's encoding)
//   1100000  110    0001011   PCVT.P.S -> OP_F2P  (this design's encoding)
// is_posit_o is set for any of these; any other word in the two opcode spaces
// raises illegal_o. Other opcodes are left to the host decoder (both low).
//
// Purely combinational. The first five encodings are the published ones; the
// reciprocal and conversion encodings are not given and were chosen to fill
// free funct3 values next to them.
module ppu_instr_decoder
  import ppu_pkg::*;
(
  input  logic [31:0] instr_i,
  output logic        is_posit_o,
  output logic        illegal_o,
  output ppu_op_e     op_o,
  output logic [4:0]  rs1_o,
  output logic [4:0]  rs2_o,
  output logic [4:0]  rs3_o,
  output logic [4:0]  rd_o
);

  localparam logic [6:0] OPC_POSIT = 7'b0001011;
  localparam logic [6:0] OPC_FMA   = 7'b0101011;
  localparam logic [6:0] F7_ARITH  = 7'b1100000;
  localparam logic [6:0] F7_SUB    = 7'b1101010;

  logic [6:0] opcode, funct7;
  logic [2:0] funct3;

  always_comb begin
    opcode = instr_i[6:0];
    funct3 = instr_i[14:12];
    funct7 = instr_i[31:25];
    rd_o   = instr_i[11:7];
    rs1_o  = instr_i[19:15];
    rs2_o  = instr_i[24:20];
    rs3_o  = instr_i[31:27];
    is_posit_o = 1'b0;
    op_o       = OP_ADD;
    if (opcode == OPC_POSIT) begin
      is_posit_o = 1'b1;
      unique case ({funct7, funct3})
        {F7_ARITH, 3'b000}: op_o = OP_ADD;
        {F7_SUB,   3'b001}: op_o = OP_SUB;
        {F7_ARITH, 3'b010}: op_o = OP_MUL;
        {F7_ARITH, 3'b100}: op_o = OP_DIV;
        {F7_ARITH, 3'b011}: op_o = OP_INV;
        {F7_ARITH, 3'b101}: op_o = OP_P2F;
        {F7_ARITH, 3'b110}: op_o = OP_F2P;
        default:            is_posit_o = 1'b0;
      endcase
    end else if (opcode == OPC_FMA && funct3 == 3'b000 && funct7[1:0] == 2'b00) begin
      is_posit_o = 1'b1;
      op_o       = OP_FMADD;
    end
    illegal_o = !is_posit_o && (opcode == OPC_POSIT || opcode == OPC_FMA);
  end

endmodule
