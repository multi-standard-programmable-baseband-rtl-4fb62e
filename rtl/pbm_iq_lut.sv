// pbm_iq_lut: IQ mapper look-up table, shared by the QPSK, pi/4 DQPSK and
// OQPSK mappers.
//
// Input is a carrier phase in units of pi/4 (0..7); output is the pair of
// amplitude codes (cos(phase), sin(phase)) from the five-entry set
// {0, 0.707, 1, -0.707, -1}. The phase-calculator-plus-LUT structure and the
// amplitude set are the paper's; the 8-entry phase indexing is this design's.
// Purely combinational.
module pbm_iq_lut
  import pbm_pkg::*;
(
  input  logic [2:0] phase,  // multiple of pi/4
  output iq_sym_t    sym     // {I, Q} amplitude codes
);

  always_comb begin
    unique case (phase)
      3'd0: sym = '{i: LVL_P1,   q: LVL_ZERO};
      3'd1: sym = '{i: LVL_P707, q: LVL_P707};
      3'd2: sym = '{i: LVL_ZERO, q: LVL_P1};
      3'd3: sym = '{i: LVL_N707, q: LVL_P707};
      3'd4: sym = '{i: LVL_N1,   q: LVL_ZERO};
      3'd5: sym = '{i: LVL_N707, q: LVL_N707};
      3'd6: sym = '{i: LVL_ZERO, q: LVL_N1};
      3'd7: sym = '{i: LVL_P707, q: LVL_N707};
    endcase
  end

endmodule
