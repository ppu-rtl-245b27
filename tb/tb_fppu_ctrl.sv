// Self-checking testbench of fppu_ctrl.
// Random valid_i patterns, including back-to-back operations; valid_o must
// repeat valid_i exactly three cycles later, and a reset in the middle must
// clear every operation in flight.
module tb_fppu_ctrl;
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

  logic rst, vi, vo;
  logic [2:0] sv;
  fppu_ctrl #(.STAGES(3)) dut (.clk, .rst, .valid_i(vi), .stage_valid_o(sv), .valid_o(vo));

  logic [2:0] hist;   // valid_i of the last three cycles, reset-aware
  initial begin
    rst = 1; vi = 0; hist = '0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst = 0;
    for (int i = 0; i < 5000; i++) begin
      @(negedge clk);
      checks++;
      if (vo != hist[2] || sv != hist) begin
        failures++;
        if (failures < 20) $display("FAIL cycle %0d vo=%0d want %0d", i, vo, hist[2]);
      end
      vi  = ($urandom_range(0, 2) != 0);
      rst = (i == 2500);
      @(posedge clk);
      hist = rst ? 3'b000 : {hist[1:0], vi};
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
