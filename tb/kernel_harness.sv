// Kernel runner for one posit configuration, used by tb_kernels.
//
// Holds a ppu_top of posit<N,ES> (XLEN/N SIMD lanes) and plays the host
// core: it runs a 32x32 matrix product, a 3x3 convolution over a 32x32 image
// and a 4x4 average pooling of a 32x32 image with PMUL, PADD and PDIV
// instructions, one instruction in flight at a time, one output element per
// lane. Inputs are random reals in [-1,1) rounded to posits.
// Every instruction's result is checked lane by lane against the reference
// posit operation on the same operands (exact for PADD/PMUL, correctly
// rounded or a neighbouring code for PDIV), with a latency of three cycles.
// The same kernel runs in double precision beside it. Per kernel and
// operation two differences of each instruction's posit result from the
// double result of the same step are reported: the mean relative difference,
// and the normalised difference sum|posit - double| / sum|double|, which is
// not dominated by the few steps whose exact value is close to zero.
// The cycles spent and the lane operations done are counted, giving the
// throughput of a host that waits for each result before issuing the next.
module kernel_harness
  import ppu_pkg::*;
  import posit_ref_pkg::*;
  import fppu_ref_pkg::*;
#(
  parameter int N = 16,
  parameter int ES = 2
) (
  input  logic clk,
  output logic done,
  output int   checks,
  output int   failures,
  output int   cycles,           // clock cycles spent in the three kernels
  output int   lane_ops,         // posit operations done in them (enabled lanes)
  output real  mean_err [3][3],  // [GEMM, conv, pool][mul, add, div]; -1 if none
  output real  norm_err [3][3]   // sum |posit - double| / sum |double|, same layout
);

  localparam int S = 32, L = 32 / N;
  typedef logic [N-1:0] posit_t;

  logic rst, vi, vo, ill;
  logic [31:0] instr, rs1, rs2, rs3, rd;
  logic [4:0] a1, a2, a3, ard;

  ppu_top #(.N(N), .ES(ES)) dut (
    .clk, .rst, .valid_i(vi), .instr_i(instr), .rs1_data_i(rs1), .rs2_data_i(rs2), .rs3_data_i(rs3),
    .rs1_addr_o(a1), .rs2_addr_o(a2), .rs3_addr_o(a3), .illegal_o(ill),
    .valid_o(vo), .rd_addr_o(ard), .rd_data_o(rd));

  typedef struct { posit_t p; real f; } val_t;
  typedef val_t vec_t [L];

  int cyc = 0, cyc0 = 0;
  always @(posedge clk) cyc <= cyc + 1;

  real err_sum[3][3];
  int  err_cnt[3][3];
  real abs_sum[3][3], ref_sum[3][3];
  int  kern;

  // one L-lane instruction; lanes with en[l] = 0 carry zeros and are not scored
  task automatic exec(ppu_op_e op, vec_t x, vec_t y, bit en [L], output vec_t r);
    logic [31:0] w;
    int t, k;
    bit ap;
    longint unsigned want;
    real fr [L];
    case (op)
      OP_MUL:  begin w = 32'hC000250B; k = 0; end
      OP_ADD:  begin w = 32'hC000050B; k = 1; end
      default: begin w = 32'hC000450B; k = 2; end
    endcase
    for (int l = 0; l < L; l++)
      fr[l] = (op == OP_MUL) ? x[l].f * y[l].f : (op == OP_ADD) ? x[l].f + y[l].f : x[l].f / y[l].f;
    // called at a falling edge: issue now, in the cycle the previous result returned
    instr = w; vi = 1; rs3 = '0;
    for (int l = 0; l < L; l++) begin rs1[l*N +: N] = x[l].p; rs2[l*N +: N] = y[l].p; end
    @(negedge clk);
    vi = 0;
    t = 1;
    while (!vo && t < 10) begin @(negedge clk); t++; end
    checks++;
    if (t != 3 || ard != 5'd10) begin failures++; $display("FAIL latency %0d", t); end
    for (int l = 0; l < L; l++) begin
      want = fppu_expect(op, 32'(rs1[l*N +: N]), 64'(rs2[l*N +: N]), 0, N, ES, ap);
      checks++;
      if (ap ? !near_code(64'(rd[l*N +: N]), want, N) : rd[l*N +: N] != N'(want)) begin
        failures++;
        if (failures < 20) $display("FAIL p<%0d,%0d> %s %h %h: got %h want %h", N, ES, op.name(), rs1, rs2, rd, want);
      end
      if (en[l]) lane_ops++;
      if (en[l] && fr[l] != 0.0) begin
        real d;
        d = (posit_to_real(64'(rd[l*N +: N]), N, ES) - fr[l]) / fr[l];
        err_sum[kern][k] += (d < 0.0) ? -d : d;
        err_cnt[kern][k]++;
        d = posit_to_real(64'(rd[l*N +: N]), N, ES) - fr[l];
        abs_sum[kern][k] += (d < 0.0) ? -d : d;
        ref_sum[kern][k] += (fr[l] < 0.0) ? -fr[l] : fr[l];
      end
      r[l].p = rd[l*N +: N];
      r[l].f = fr[l];
    end
  endtask

  function automatic val_t rnd_val();
    val_t v;
    real r;
    r = (real'($urandom_range(0, 65535)) - 32768.0) / 32768.0;
    v.p = N'(real_to_posit(r, N, ES));
    v.f = r;
    return v;
  endfunction

  val_t A[S][S], B[S][S], K3[3][3];

  initial begin
    vec_t acc, prod, x, y;
    bit   en [L];
    val_t zero, sixteen;
    done = 0; checks = 0; failures = 0;
    zero.p = '0; zero.f = 0.0;
    sixteen.p = N'(real_to_posit(16.0, N, ES)); sixteen.f = 16.0;
    rst = 1; vi = 0; instr = 0; rs1 = 0; rs2 = 0; rs3 = 0;
    foreach (err_sum[i, j]) begin
      err_sum[i][j] = 0.0; err_cnt[i][j] = 0; abs_sum[i][j] = 0.0; ref_sum[i][j] = 0.0;
    end
    repeat (3) @(posedge clk);
    @(negedge clk) rst = 0;
    lane_ops = 0;
    cycles = 0;
    foreach (A[i, j]) begin A[i][j] = rnd_val(); B[i][j] = rnd_val(); end
    foreach (K3[i, j]) K3[i][j] = rnd_val();

    // GEMM: C = A*B, columns j .. j+L-1 in the lanes
    cyc0 = cyc;
    kern = 0;
    for (int i = 0; i < S; i++)
      for (int j = 0; j < S; j += L) begin
        foreach (acc[l]) begin acc[l] = zero; en[l] = 1; end
        for (int k = 0; k < S; k++) begin
          foreach (x[l]) begin x[l] = A[i][k]; y[l] = B[k][j+l]; end
          exec(OP_MUL, x, y, en, prod);
          exec(OP_ADD, acc, prod, en, acc);
        end
      end

    // 3x3 convolution of A, valid region 30x30
    kern = 1;
    for (int i = 0; i < S - 2; i++)
      for (int j = 0; j < S - 2; j += L) begin
        foreach (acc[l]) begin acc[l] = zero; en[l] = (j + l < S - 2); end
        for (int u = 0; u < 3; u++)
          for (int v = 0; v < 3; v++) begin
            foreach (x[l]) begin
              x[l] = en[l] ? A[i+u][j+l+v] : zero;
              y[l] = K3[u][v];
            end
            exec(OP_MUL, x, y, en, prod);
            exec(OP_ADD, acc, prod, en, acc);
          end
      end

    // 4x4 average pooling of B, stride 4: sum of 16 inputs, then divide by 16
    kern = 2;
    for (int i = 0; i < S; i += 4)
      for (int j = 0; j < S / 4; j += L) begin
        foreach (acc[l]) begin acc[l] = zero; en[l] = 1; end
        for (int u = 0; u < 4; u++)
          for (int v = 0; v < 4; v++) begin
            foreach (x[l]) x[l] = B[i+u][4*(j+l)+v];
            exec(OP_ADD, acc, x, en, acc);
          end
        foreach (y[l]) y[l] = sixteen;
        exec(OP_DIV, acc, y, en, acc);
      end

    foreach (mean_err[k, o]) begin
      mean_err[k][o] = (err_cnt[k][o] > 0) ? err_sum[k][o] / real'(err_cnt[k][o]) : -1.0;
      norm_err[k][o] = (err_cnt[k][o] > 0) ? abs_sum[k][o] / ref_sum[k][o] : -1.0;
    end
    done = 1;
    cycles = cyc - cyc0;
  end

endmodule
