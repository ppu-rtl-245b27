// Full Posit Processing Unit (FPPU): one pipelined posit<N,ES> lane.
//
// Executes add, sub, mul, div, fused multiply-add, reciprocal and the two
// binary32 conversions. The datapath has four combinational stages cut by
// three registers:
//   1. extraction: input conditioning (zero/NaR special cases) and three
//      posit-to-FIR decoders; the raw operand 1 is carried on for
//      float-to-posit.
//   2a. computation, first half: multiplier (MUL and the product of FMADD),
//      reciprocal approximation of the divider, binary32 decode of operand 1,
//      binary32 encode of the decoded operand 2.
//   2b. computation, second half: adder/subtractor (ADD, SUB and the
//      accumulate of FMADD), Newton-Raphson step and quotient multiply; a mux
//      picks the FIR result of the operation.
//   3. normalisation: FIR-to-posit with round to nearest even, then the
//      output mux selects the posit, the binary32 word or the special result.
// The operation code travels with its data, so a new operation may enter
// every cycle. The control unit returns valid_o three cycles after valid_i.
//
// Interface: operand1 is RW = max(N,32) bits wide: its N LSBs are posit p1,
// all 32 bits the binary32 input of OP_F2P. operand2/operand3 are posits.
// result_o holds a posit in its N LSBs (upper bits zero) or, for OP_P2F, the
// binary32 word. The result is combinational from the last register.
//
// From the design description: the stage structure, the blocks and their
// connections (float-to-FIR fed from raw operand 1, FIR-to-float fed from the
// decoded operand 2, the special path around the arithmetic), the division
// algorithm and the rounding. This design's choices: the extra operand3 port
// for FMADD, the reciprocal taken of operand 1, the register placement inside
// the computation stage and the widths.
module fppu
  import ppu_pkg::*;
#(
  parameter int unsigned N  = 16,
  parameter int unsigned ES = 2,
  parameter int unsigned RW = (N > FLOAT_W) ? N : FLOAT_W
) (
  input  logic          clk,
  input  logic          rst,
  input  logic          valid_i,
  input  ppu_op_e       op_i,
  input  logic [RW-1:0] operand1_i,
  input  logic [N-1:0]  operand2_i,
  input  logic [N-1:0]  operand3_i,
  output logic          valid_o,
  output logic [RW-1:0] result_o
);

  localparam int unsigned FW  = frac_width(N, ES);
  localparam int unsigned MW  = FW + 1;          // significand with hidden bit
  localparam int unsigned PW  = 2 * MW;          // product significand
  localparam int unsigned TEW = te_width(N, ES);
  localparam int unsigned MO  = norm_width(N, ES);

  typedef struct packed {
    logic                  s;
    logic signed [TEW-1:0] te;
    logic [MW-1:0]         m;
    logic                  zero;
    logic                  nar;
  } fir_t;

  typedef struct packed {
    logic                  s;
    logic signed [TEW-1:0] te;
    logic [MO-1:0]         m;
    logic                  sticky;
    logic                  zero;
    logic                  nar;
  } fir_res_t;

  // Only valid_o is used: the data registers are clocked every cycle.
  logic [2:0] stage_valid;

  fppu_ctrl #(.STAGES(3)) u_ctrl (
    .clk, .rst, .valid_i, .stage_valid_o(stage_valid), .valid_o
  );

  // ------------------------------------------------------------ stage 1
  fir_t       f1_d, f2_d, f3_d;
  logic       spec_d;
  logic [N-1:0] spec_res_d;

  posit_to_fir #(.N(N), .ES(ES), .FW(FW), .TEW(TEW)) u_dec1 (
    .posit_i(operand1_i[N-1:0]), .sign_o(f1_d.s), .te_o(f1_d.te), .mant_o(f1_d.m),
    .zero_o(f1_d.zero), .nar_o(f1_d.nar));
  posit_to_fir #(.N(N), .ES(ES), .FW(FW), .TEW(TEW)) u_dec2 (
    .posit_i(operand2_i), .sign_o(f2_d.s), .te_o(f2_d.te), .mant_o(f2_d.m),
    .zero_o(f2_d.zero), .nar_o(f2_d.nar));
  posit_to_fir #(.N(N), .ES(ES), .FW(FW), .TEW(TEW)) u_dec3 (
    .posit_i(operand3_i), .sign_o(f3_d.s), .te_o(f3_d.te), .mant_o(f3_d.m),
    .zero_o(f3_d.zero), .nar_o(f3_d.nar));

  input_conditioning #(.N(N)) u_cond (
    .op_i, .p1_i(operand1_i[N-1:0]), .p2_i(operand2_i), .p3_i(operand3_i),
    .special_o(spec_d), .special_res_o(spec_res_d));

  ppu_op_e       op_q1;
  fir_t          f1_q1, f2_q1, f3_q1;
  logic          spec_q1;
  logic [N-1:0]  spec_res_q1;
  logic [FLOAT_W-1:0] raw_q1;

  always_ff @(posedge clk) begin
    op_q1       <= op_i;
    f1_q1       <= f1_d;
    f2_q1       <= f2_d;
    f3_q1       <= f3_d;
    spec_q1     <= spec_d;
    spec_res_q1 <= spec_res_d;
    raw_q1      <= operand1_i[FLOAT_W-1:0];
  end

  // ------------------------------------------------------------ stage 2a
  logic                  mul_s;
  logic signed [TEW-1:0] mul_te;
  logic [PW-1:0]         mul_m;

  fppu_mul #(.MW(MW), .TEW(TEW)) u_mul (
    .s1_i(f1_q1.s), .te1_i(f1_q1.te), .m1_i(f1_q1.m),
    .s2_i(f2_q1.s), .te2_i(f2_q1.te), .m2_i(f2_q1.m),
    .s_o(mul_s), .te_o(mul_te), .m_o(mul_m));

  // divider operands: p1/p2, or 1/p1 for the reciprocal
  fir_t dvd, dvs;
  always_comb begin
    dvd = f1_q1;
    dvs = f2_q1;
    if (op_q1 == OP_INV) begin
      dvd = '{s: 1'b0, te: '0, m: {1'b1, {FW{1'b0}}}, zero: 1'b0, nar: 1'b0};
      dvs = f1_q1;
    end
  end

  logic                  div_s;
  logic signed [TEW-1:0] div_te;
  logic [MO-1:0]         div_m;
  logic                  div_st;

  fppu_div #(.MW(MW), .TEW(TEW), .MO(MO)) u_div (
    .clk,
    .s1_i(dvd.s), .te1_i(dvd.te), .m1_i(dvd.m),
    .s2_i(dvs.s), .te2_i(dvs.te), .m2_i(dvs.m),
    .s_o(div_s), .te_o(div_te), .m_o(div_m), .sticky_o(div_st));

  logic                  ff_s, ff_zero, ff_nar;
  logic signed [TEW-1:0] ff_te;
  logic [23:0]           ff_m;

  float_to_fir #(.TEW(TEW)) u_f2fir (
    .float_i(raw_q1), .sign_o(ff_s), .te_o(ff_te), .mant_o(ff_m),
    .zero_o(ff_zero), .nar_o(ff_nar));

  logic [FLOAT_W-1:0] fl_d;

  fir_to_float #(.MI(MW), .TEW(TEW)) u_fir2f (
    .sign_i(f2_q1.s), .te_i(f2_q1.te), .mant_i(f2_q1.m),
    .zero_i(f2_q1.zero), .nar_i(f2_q1.nar), .float_o(fl_d));

  ppu_op_e       op_q2;
  fir_t          f1_q2, f2_q2, f3_q2;
  logic          spec_q2;
  logic [N-1:0]  spec_res_q2;
  logic                  mul_s_q2;
  logic signed [TEW-1:0] mul_te_q2;
  logic [PW-1:0]         mul_m_q2;
  fir_res_t      ff_q2;
  logic [FLOAT_W-1:0] fl_q2;

  always_ff @(posedge clk) begin
    op_q2       <= op_q1;
    f1_q2       <= f1_q1;
    f2_q2       <= f2_q1;
    f3_q2       <= f3_q1;
    spec_q2     <= spec_q1;
    spec_res_q2 <= spec_res_q1;
    mul_s_q2    <= mul_s;
    mul_te_q2   <= mul_te;
    mul_m_q2    <= mul_m;
    ff_q2       <= '{s: ff_s, te: ff_te, m: MO'({ff_m, {(MO-24){1'b0}}}),
                     sticky: 1'b0, zero: ff_zero, nar: ff_nar};
    fl_q2       <= fl_d;
  end

  // ------------------------------------------------------------ stage 2b
  logic                  a_s, b_s, add_sub, add_z2;
  logic signed [TEW-1:0] a_te, b_te;
  logic [PW-1:0]         a_m, b_m;

  always_comb begin
    if (op_q2 == OP_FMADD) begin
      a_s = mul_s_q2;  a_te = mul_te_q2;  a_m = mul_m_q2;
      b_s = f3_q2.s;   b_te = f3_q2.te;   b_m = {f3_q2.m, {MW{1'b0}}};
      add_sub = 1'b0;  add_z2 = f3_q2.zero;
    end else begin
      a_s = f1_q2.s;   a_te = f1_q2.te;   a_m = {f1_q2.m, {MW{1'b0}}};
      b_s = f2_q2.s;   b_te = f2_q2.te;   b_m = {f2_q2.m, {MW{1'b0}}};
      add_sub = (op_q2 == OP_SUB);  add_z2 = f2_q2.zero;
    end
  end

  logic                  add_s, add_st, add_zero;
  logic signed [TEW-1:0] add_te;
  logic [MO-1:0]         add_m;

  fppu_addsub #(.MI(PW), .TEW(TEW), .MO(MO)) u_add (
    .s1_i(a_s), .te1_i(a_te), .m1_i(a_m),
    .s2_i(b_s), .te2_i(b_te), .m2_i(b_m), .zero2_i(add_z2), .sub_i(add_sub),
    .s_o(add_s), .te_o(add_te), .m_o(add_m), .sticky_o(add_st), .zero_o(add_zero));

  fir_res_t res_d;

  always_comb begin
    unique case (op_q2)
      OP_ADD, OP_SUB, OP_FMADD:
        res_d = '{s: add_s, te: add_te, m: add_m, sticky: add_st, zero: add_zero, nar: 1'b0};
      OP_MUL:
        res_d = '{s: mul_s_q2, te: mul_te_q2, m: MO'({mul_m_q2, {(MO-PW){1'b0}}}),
                  sticky: 1'b0, zero: 1'b0, nar: 1'b0};
      OP_DIV, OP_INV:
        res_d = '{s: div_s, te: div_te, m: div_m, sticky: div_st, zero: 1'b0, nar: 1'b0};
      default:
        res_d = ff_q2;
    endcase
  end

  ppu_op_e      op_q3;
  fir_res_t     res_q3;
  logic         spec_q3;
  logic [N-1:0] spec_res_q3;
  logic [FLOAT_W-1:0] fl_q3;

  always_ff @(posedge clk) begin
    op_q3       <= op_q2;
    res_q3      <= res_d;
    spec_q3     <= spec_q2;
    spec_res_q3 <= spec_res_q2;
    fl_q3       <= fl_q2;
  end

  // ------------------------------------------------------------ stage 3
  logic [N-1:0] posit_res;

  fir_to_posit #(.N(N), .ES(ES), .MI(MO), .TEW(TEW)) u_norm (
    .sign_i(res_q3.s), .te_i(res_q3.te), .mant_i(res_q3.m), .sticky_i(res_q3.sticky),
    .zero_i(res_q3.zero), .nar_i(res_q3.nar), .posit_o(posit_res));

  always_comb begin
    if (op_q3 == OP_P2F)  result_o = RW'(fl_q3);
    else if (spec_q3)     result_o = RW'(spec_res_q3);
    else                  result_o = RW'(posit_res);
  end

endmodule
