// Posit to FIR decoder.
//
// Splits a posit<N,ES> into the floating-point intermediate representation
// (FIR) used by every arithmetic unit: sign, signed total exponent
// te = k*2^ES + e and the significand 1.f with its hidden bit at the MSB.
// The operand is made positive (two's complement), the regime run length l is
// counted, k = l-1 for a run of ones and -l for a run of zeros, and the bits
// after the stop bit are shifted up so that an exponent cut short by a long
// regime is padded with zeros on its right, as the posit standard requires.
// Zero and NaR are flagged; te and mant are then don't-care.
//
// Purely combinational. The decoding follows the posit definition; the port
// layout and flag outputs are this design's choice.
module posit_to_fir
  import ppu_pkg::*;
#(
  parameter int unsigned N   = 16,
  parameter int unsigned ES  = 2,
  parameter int unsigned FW  = frac_width(N, ES),
  parameter int unsigned TEW = te_width(N, ES)
) (
  input  logic [N-1:0]          posit_i,
  output logic                  sign_o,
  output logic signed [TEW-1:0] te_o,
  output logic [FW:0]           mant_o,   // 1.f, hidden bit at MSB
  output logic                  zero_o,
  output logic                  nar_o
);

  logic [N-1:0]   mag;
  logic [N-2:0]   body;
  logic [N-2:0]   rest;
  logic           rb;
  int unsigned    run;
  logic           done;
  logic signed [TEW-1:0] k;
  logic [TEW-1:0] e;

  always_comb begin
    sign_o = posit_i[N-1];
    zero_o = (posit_i == '0);
    nar_o  = (posit_i == {1'b1, {(N-1){1'b0}}});
    mag    = posit_i[N-1] ? (~posit_i + 1'b1) : posit_i;
    body   = mag[N-2:0];
    rb     = body[N-2];
    run    = 0;
    done   = 1'b0;
    for (int i = N - 2; i >= 0; i--) begin
      if (!done && body[i] == rb) run++;
      else done = 1'b1;
    end
    k      = rb ? TEW'(run - 1) : -TEW'(run);
    // drop regime and stop bit; zeros fill from the right
    rest   = (run + 1 >= N - 1) ? '0 : (body << (run + 1));
    e      = TEW'(rest >> (N - 1 - ES));
    te_o   = (k <<< ES) + $signed(e);
    mant_o = {1'b1, FW'(rest >> 2)};
  end

endmodule
