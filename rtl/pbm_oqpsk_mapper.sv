// pbm_oqpsk_mapper: OQPSK symbol mapper.
//
// Each rail carries +0.707 for bit 0 and -0.707 for bit 1, so only the four
// diagonal phases pi/4, 3pi/4, 5pi/4, 7pi/4 occur. The phase calculator
// derives that phase from {I, Q} and the IQ LUT turns it into amplitudes.
// The half-symbol offset of Q is not made here: the Q input is the data
// generator's delayed Q bit and the symbol mapper registers the Q rail half a
// symbol after the I rail. The amplitude set {-0.707, 0.707} is the paper's;
// the bit-to-sign rule is this design's. Combinational.
module pbm_oqpsk_mapper
  import pbm_pkg::*;
(
  input  logic    i_in,
  input  logic    q_in,   // delayed (offset) Q bit
  output iq_sym_t sym
);

  logic [2:0] phase;

  always_comb begin
    unique case ({i_in, q_in})
      2'b00: phase = 3'd1;  // ( +0.707, +0.707)
      2'b10: phase = 3'd3;  // ( -0.707, +0.707)
      2'b11: phase = 3'd5;  // ( -0.707, -0.707)
      2'b01: phase = 3'd7;  // ( +0.707, -0.707)
    endcase
  end

  pbm_iq_lut u_lut (.phase(phase), .sym(sym));

endmodule
