// Division accuracy of the FPPU for the posit configurations of the
// published comparison: posit<8,ES> for ES = 0..4 over all 256 x 256 operand
// pairs, and posit<16,ES> for ES = 0..3 over random pairs. Each lane is an
// fppu instance of that configuration, fed one division per cycle. A result
// must be the correctly rounded quotient or a neighbouring code (checked);
// the share of quotients that are not correctly rounded is printed next to
// the published figures (1.4 1.2 2.1 4.2 7.5 / 1.5 0.6 0.5 0.1 %) and must
// stay below the LUT-based reference design's (4.8 5.4 9.3 13.5 16.4 /
// 10.0 10.0 8.8 9.0 %). Division by zero and NaR operands are left out, as
// they are exact by construction.
module tb_div_accuracy;
  import ppu_pkg::*;
  import posit_ref_pkg::*;
  import fppu_ref_pkg::*;

  localparam int NCFG = 9;
  localparam int CN [NCFG] = '{8, 8, 8, 8, 8, 16, 16, 16, 16};
  localparam int CES[NCFG] = '{0, 1, 2, 3, 4, 0, 1, 2, 3};
  localparam real PAPER[NCFG] = '{1.4, 1.2, 2.1, 4.2, 7.5, 1.5, 0.6, 0.5, 0.1};
  localparam real LUT  [NCFG] = '{4.8, 5.4, 9.3, 13.5, 16.4, 10.0, 10.0, 8.8, 9.0};
  localparam int SAMPLES16 = 40000;

  int checks = 0, failures = 0;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  initial begin
    repeat (1000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic        rst = 1'b1;
  logic        vi  = 1'b0;
  logic [15:0] a, b;
  logic [31:0] res [NCFG];
  logic        vo  [NCFG];

  for (genvar c = 0; c < NCFG; c++) begin : g_cfg
    fppu #(.N(CN[c]), .ES(CES[c])) u (
      .clk, .rst, .valid_i(vi), .op_i(OP_DIV), .operand1_i(32'(a[CN[c]-1:0])),
      .operand2_i(b[CN[c]-1:0]), .operand3_i('0), .valid_o(vo[c]), .result_o(res[c]));
  end

  // results come out three cycles after issue; keep a small history
  typedef struct { logic [15:0] a, b; bit live; } hist_t;
  hist_t h[3];
  int total[NCFG], wrong[NCFG];
  int cur;   // configuration being measured

  initial begin
    int count;
    bit apx;
    longint unsigned want;
    logic [15:0] ra, rb, mask;
    repeat (3) @(posedge clk);
    @(negedge clk) rst = 0;
    for (int c = 0; c < NCFG; c++) begin
      cur = c;
      mask = 16'((32'd1 << CN[c]) - 1);
      count = (CN[c] == 8) ? 65536 : SAMPLES16;
      foreach (h[i]) h[i].live = 0;
      for (int i = 0; i < count + 3; i++) begin
        @(negedge clk);
        // check the result of the division issued three cycles ago
        if (h[2].live) begin
          if (!vo[c]) begin failures++; $display("FAIL no valid_o"); end
          want = fppu_expect(OP_DIV, 32'(h[2].a), 64'(h[2].b), 0, CN[c], CES[c], apx);
          checks++;
          total[c]++;
          if (16'(res[c]) != 16'(want)) wrong[c]++;
          if (!near_code(64'(res[c][15:0] & mask), want, CN[c])) begin
            failures++;
            if (failures < 20) $display("FAIL p<%0d,%0d> %h/%h got %h want %h", CN[c], CES[c], h[2].a, h[2].b, res[c], want);
          end
        end
        for (int j = 2; j > 0; j--) h[j] = h[j-1];
        h[0].live = 0;
        vi = 0;
        if (i < count) begin
          if (CN[c] == 8) begin ra = 16'(i[15:8]); rb = 16'(i[7:0]); end
          else begin ra = 16'($urandom); rb = 16'($urandom); end
          ra &= mask; rb &= mask;
          if (rb != 0 && !is_nar(64'(rb), CN[c]) && !is_nar(64'(ra), CN[c]) && ra != 0) begin
            a = ra; b = rb; vi = 1;
            h[0] = '{a: ra, b: rb, live: 1};
          end
        end
      end
    end
    for (int c = 0; c < NCFG; c++) begin
      real pct;
      pct = 100.0 * real'(wrong[c]) / real'(total[c]);
      $display("p<%0d,%0d>: %0d quotients, %0d not correctly rounded = %0.2f %% (published %0.1f %%, LUT design %0.1f %%)",
               CN[c], CES[c], total[c], wrong[c], pct, PAPER[c], LUT[c]);
      checks++;
      if (pct >= LUT[c]) begin failures++; $display("FAIL p<%0d,%0d> not better than the LUT design", CN[c], CES[c]); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
