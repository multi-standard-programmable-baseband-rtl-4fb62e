// pbm_qpsk_mapper: QPSK symbol mapper.
//
// The phase calculator turns the bit pair {I, Q} into the absolute carrier
// phase of the paper's QPSK table (00 -> 0, 01 -> pi/2, 10 -> pi,
// 11 -> 3pi/2), and the IQ LUT turns the phase into amplitudes, so each rail
// carries a value from {-1, 0, 1}. Combinational; the symbol mapper registers
// the result.
module pbm_qpsk_mapper
  import pbm_pkg::*;
(
  input  logic    i_in,
  input  logic    q_in,
  output iq_sym_t sym
);

  logic [2:0] phase;

  // phase = {I,Q} * pi/2, expressed in units of pi/4
  always_comb phase = {i_in, q_in, 1'b0};

  pbm_iq_lut u_lut (.phase(phase), .sym(sym));

endmodule
