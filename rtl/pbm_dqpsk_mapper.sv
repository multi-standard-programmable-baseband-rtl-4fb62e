// pbm_dqpsk_mapper: DQPSK differential encoder and mapper.
//
// The encoder follows the paper's Boolean equations for the encoded bits,
// with the previous encoded pair {I'(n-1), Q'(n-1)} held in a one-symbol delay
// register:
//   I'n = In.~I'.~Q' + Qn.~I'.Q' + ~In.I'.Q' + ~Qn.I'.~Q'
//   Q'n = Qn.~I'.~Q' + ~In.~I'.Q' + ~Qn.I'.Q' + In.I'.~Q'
// (I', Q' = previous encoded bits). The paper's printed equations mix
// primed and unprimed previous bits; the feedback drawn in its encoder
// schematic carries only the primed ones, and that is what is built here.
// The result rotates the input pair by the phase of the previous encoded
// symbol. Each encoded bit is then mapped to an antipodal amplitude
// (0 -> +1, 1 -> -1), which gives the square (+-1, +-1) constellation; this
// mapping is this design's choice.
//
// Interface and timing: sym is combinational and shows the encoding of the
// current input pair; on a cycle with en high the delay register takes it, so
// sym must be sampled in that same cycle. Reset clears the delay register.
module pbm_dqpsk_mapper
  import pbm_pkg::*;
(
  input  logic    clk,
  input  logic    rst_n,
  input  logic    en,      // one pulse per symbol
  input  logic    i_in,
  input  logic    q_in,
  output iq_sym_t sym
);

  logic ip, qp;            // I'(n-1), Q'(n-1)
  logic in_enc, qn_enc;    // I'n, Q'n

  always_comb begin
    in_enc = ( i_in & ~ip & ~qp) | ( q_in & ~ip &  qp) |
             (~i_in &  ip &  qp) | (~q_in &  ip & ~qp);
    qn_enc = ( q_in & ~ip & ~qp) | (~i_in & ~ip &  qp) |
             (~q_in &  ip &  qp) | ( i_in &  ip & ~qp);
    sym.i  = in_enc ? LVL_N1 : LVL_P1;
    sym.q  = qn_enc ? LVL_N1 : LVL_P1;
  end

  // one symbol delay
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ip <= 1'b0;
      qp <= 1'b0;
    end else if (en) begin
      ip <= in_enc;
      qp <= qn_enc;
    end
  end

endmodule
