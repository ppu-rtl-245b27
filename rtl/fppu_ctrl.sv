// FPPU control unit.
//
// A shift register of valid bits, one per pipeline register of the FPPU. An
// operation accepted with valid_i in cycle t is flagged in stage_valid_o[0]
// in cycle t+1, ... and leaves with valid_o in cycle t+STAGES. A new
// operation may be accepted every cycle. Synchronous active-high reset clears
// all valid bits.
//
// The block and its role (telling whether the output is valid) are from the
// design description; the 3-cycle latency follows its timing diagram.
module fppu_ctrl #(
  parameter int unsigned STAGES = 3
) (
  input  logic              clk,
  input  logic              rst,
  input  logic              valid_i,
  output logic [STAGES-1:0] stage_valid_o,
  output logic              valid_o
);

  always_ff @(posedge clk) begin
    if (rst) stage_valid_o <= '0;
    else     stage_valid_o <= {stage_valid_o[STAGES-2:0], valid_i};
  end

  assign valid_o = stage_valid_o[STAGES-1];

endmodule
