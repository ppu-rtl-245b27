// Posit processing unit as seen by a 32-bit RISC-V execute stage, in its
// SIMD configuration.
//
// A decoded posit instruction and its register operands enter together with
// valid_i. LANES = XLEN/N FPPU lanes (4 for posit8, 2 for posit16, 1 for
// posit32) share the operation, valid, clock and reset; lane i works on bits
// [i*N +: N] of rs1/rs2/rs3 and writes the same bits of rd_data_o, so scalar
// code that keeps its posit in the low bits sees an ordinary one-lane unit.
// The binary32 conversions use lane 0 only: for OP_F2P lane 0 reads all of
// rs1 as a binary32 word, for OP_P2F rd_data_o is lane 0's 32-bit result,
// and for OP_F2P rd_data_o is lane 0's posit with the upper bits zero.
// The destination register index travels down a 3-deep delay line beside the
// lanes and appears with valid_o and the result three cycles after issue.
// Words that are not posit instructions are ignored (no valid is issued);
// illegal_o flags malformed words in the posit opcode spaces, combinationally.
//
// The lane replication, shared control and concatenated result follow the
// described SIMD scheme; the conversion handling in SIMD mode, the rd delay
// line and the port set toward the host core are this design's choices.
module ppu_top
  import ppu_pkg::*;
#(
  parameter int unsigned N    = 16,
  parameter int unsigned ES   = 2,
  parameter int unsigned XLEN = 32
) (
  input  logic            clk,
  input  logic            rst,
  input  logic            valid_i,
  input  logic [31:0]     instr_i,
  input  logic [XLEN-1:0] rs1_data_i,
  input  logic [XLEN-1:0] rs2_data_i,
  input  logic [XLEN-1:0] rs3_data_i,
  output logic [4:0]      rs1_addr_o,
  output logic [4:0]      rs2_addr_o,
  output logic [4:0]      rs3_addr_o,
  output logic            illegal_o,
  output logic            valid_o,
  output logic [4:0]      rd_addr_o,
  output logic [XLEN-1:0] rd_data_o
);

  localparam int unsigned LANES = (XLEN / N > 0) ? XLEN / N : 1;
  localparam int unsigned RW    = (N > FLOAT_W) ? N : FLOAT_W;
  localparam int unsigned LAT   = 3;

  logic    is_posit;
  ppu_op_e op;
  logic [4:0] rd_addr;

  ppu_instr_decoder u_dec (
    .instr_i, .is_posit_o(is_posit), .illegal_o, .op_o(op),
    .rs1_o(rs1_addr_o), .rs2_o(rs2_addr_o), .rs3_o(rs3_addr_o), .rd_o(rd_addr));

  logic          issue;
  assign issue = valid_i && is_posit;

  logic [LANES-1:0] lane_valid;
  logic [RW-1:0]    lane_res [LANES];

  for (genvar i = 0; i < LANES; i++) begin : g_lane
    logic [RW-1:0] op1;
    if (i == 0) begin : g_full
      assign op1 = RW'(rs1_data_i);
    end else begin : g_part
      assign op1 = RW'(rs1_data_i[i*N +: N]);
    end
    fppu #(.N(N), .ES(ES), .RW(RW)) u_fppu (
      .clk, .rst, .valid_i(issue), .op_i(op),
      .operand1_i(op1), .operand2_i(rs2_data_i[i*N +: N]), .operand3_i(rs3_data_i[i*N +: N]),
      .valid_o(lane_valid[i]), .result_o(lane_res[i]));
  end

  // destination index and conversion flag beside the lanes
  logic [4:0] rd_pipe  [LAT];
  logic       cvt_pipe [LAT];   // conversion: lane 0 only

  always_ff @(posedge clk) begin
    rd_pipe[0]  <= rd_addr;
    cvt_pipe[0] <= (op == OP_P2F) || (op == OP_F2P);
    for (int s = 1; s < LAT; s++) begin
      rd_pipe[s]  <= rd_pipe[s-1];
      cvt_pipe[s] <= cvt_pipe[s-1];
    end
  end

  always_comb begin
    rd_data_o = '0;
    for (int i = 0; i < LANES; i++) rd_data_o[i*N +: N] = lane_res[i][N-1:0];
    if (cvt_pipe[LAT-1]) rd_data_o = XLEN'(lane_res[0]);
  end

  assign valid_o   = lane_valid[0];
  assign rd_addr_o = rd_pipe[LAT-1];

  // every lane sees the same valid and reset, so they agree
  always @(posedge clk) if (!rst) assert (lane_valid == {LANES{lane_valid[0]}});

endmodule
