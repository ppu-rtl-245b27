// Linear-algebra kernels of the published evaluation, run on the posit unit
// at posit<8,0> (four SIMD lanes) and posit<16,2> (two lanes, the default):
// 32x32 matrix product, 3x3 convolution over a 32x32 image, 4x4 average
// pooling of a 32x32 image (see kernel_harness for how each is run and
// checked). Every instruction result is checked against the reference. The
// mean relative difference from double precision is printed per kernel and
// operation next to the published figures (normalised mean error against
// binary32), together with the normalised difference sum|posit - double| /
// sum|double|. For posit<8,0> the mean relative difference is large: with
// inputs spread uniformly over [-1,1) many products fall below minpos (2^-6)
// and saturate there, so a few near-zero steps dominate it. The normalised
// figure is not skewed that way and comes out close to the published ones.
// Sanity bounds: posit<16,2> mean relative < 0.01 and normalised < 0.005;
// posit<8,0> normalised < 0.2.
// Throughput: the host issues the next instruction in the cycle the previous
// result returns, so with the three-cycle latency a lane does one operation
// every three cycles. The measured rate is printed as MOps/s at 100 MHz next
// to the published SIMD figures, and must reach 95 % of lanes/3 per cycle
// (the edge columns of the convolution leave some lanes idle).
module tb_kernels;
  int checks = 0, failures = 0;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic done8, done16;
  int   c8, f8, c16, f16, y8, y16, o8, o16;
  real  e8 [3][3], e16 [3][3], n8 [3][3], n16 [3][3];

  kernel_harness #(.N(8),  .ES(0)) u_p8  (.clk, .done(done8),  .checks(c8),  .failures(f8),  .cycles(y8),  .lane_ops(o8),  .mean_err(e8), .norm_err(n8));
  kernel_harness #(.N(16), .ES(2)) u_p16 (.clk, .done(done16), .checks(c16), .failures(f16), .cycles(y16), .lane_ops(o16), .mean_err(e16), .norm_err(n16));

  // published normalised mean errors: [GEMM, conv, pool][mul, add, div], -1 = not given
  real pub8  [3][3] = '{'{0.019, 0.016, -1.0}, '{0.042, 0.025, -1.0}, '{-1.0, 0.019, 0.002}};
  real pub16 [3][3] = '{'{0.003, 0.0007, -1.0}, '{0.004, 0.0004, -1.0}, '{-1.0, 0.0002, 0.0}};

  initial begin
    string kn [3] = '{"GEMM 32x32 ", "Conv 3x3   ", "AvgPool 4x4"};
    string on [3] = '{"p.mul", "p.add", "p.div"};
    wait (done8 && done16);
    checks = c8 + c16;
    failures = f8 + f16;
    $display("p<8,0>  throughput %0d ops in %0d cycles: %0.1f MOps/s at 100 MHz (published SIMD figure 132)",
             o8, y8, 100.0 * o8 / y8);
    $display("p<16,2> throughput %0d ops in %0d cycles: %0.1f MOps/s at 100 MHz (published SIMD figure 66)",
             o16, y16, 100.0 * o16 / y16);
    // a waiting host retires one instruction of all lanes every three cycles
    checks += 2;
    if (3.0 * o8 / y8 < 0.95 * 4.0 || 3.0 * o16 / y16 < 0.95 * 2.0) begin
      failures++; $display("FAIL throughput below lanes per three cycles");
    end
    for (int k = 0; k < 3; k++)
      for (int o = 0; o < 3; o++) begin
        if (e8[k][o] >= 0.0) begin
          $display("p<8,0>  %s %s: mean relative difference %0.5f, normalised %0.5f (published %0.4f)",
                   kn[k], on[o], e8[k][o], n8[k][o], pub8[k][o]);
          checks++;
          if (n8[k][o] > 0.2) begin failures++; $display("FAIL p<8,0> normalised difference too large"); end
        end
        if (e16[k][o] >= 0.0) begin
          $display("p<16,2> %s %s: mean relative difference %0.5f, normalised %0.5f (published %0.4f)",
                   kn[k], on[o], e16[k][o], n16[k][o], pub16[k][o]);
          checks++;
          if (e16[k][o] > 0.01 || n16[k][o] > 0.005) begin failures++; $display("FAIL p<16,2> error too large"); end
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
