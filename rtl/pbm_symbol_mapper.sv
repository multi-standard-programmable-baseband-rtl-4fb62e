// pbm_symbol_mapper: the four IQ mappers behind one MOD_SEL multiplexer.
//
// All four mappers (QPSK, pi/4 DQPSK, DQPSK, OQPSK) see the data generator's
// bits; MOD_SEL chooses which one drives the registered 3-bit I and Q symbol
// outputs, as in the paper. The two differential mappers keep state and
// advance only on symbols for which they are selected (this design's choice).
//
// Timing. For QPSK, DQPSK and pi/4 DQPSK both rails are loaded on sym_stb.
// For OQPSK the I rail is loaded on sym_stb and the Q rail on q_dly_stb, two
// cycles (one bit period, half a symbol) later, from the delayed Q bit; this
// offset is what makes OQPSK. i_stb / q_stb pulse in the cycle after a rail
// was loaded, i.e. in the first cycle its new symbol is on i_sym / q_sym.
// Latency from sym_stb to i_stb is one cycle. Reset sets both rails to 0.
module pbm_symbol_mapper
  import pbm_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  input  mod_sel_e mod_sel,
  input  logic     i_bit,
  input  logic     q_bit,
  input  logic     sym_stb,
  input  logic     q_dly,
  input  logic     q_dly_stb,
  output lvl_e     i_sym,
  output lvl_e     q_sym,
  output logic     i_stb,
  output logic     q_stb
);

  iq_sym_t s_qpsk, s_pi4, s_dqpsk, s_oqpsk, s_sel;
  logic    oqpsk;

  assign oqpsk = (mod_sel == MOD_OQPSK);

  pbm_qpsk_mapper u_qpsk (.i_in(i_bit), .q_in(q_bit), .sym(s_qpsk));

  pbm_pi4dqpsk_mapper u_pi4 (
    .clk, .rst_n,
    .en   (sym_stb && mod_sel == MOD_PI4DQPSK),
    .i_in (i_bit), .q_in(q_bit), .sym(s_pi4)
  );

  pbm_dqpsk_mapper u_dqpsk (
    .clk, .rst_n,
    .en   (sym_stb && mod_sel == MOD_DQPSK),
    .i_in (i_bit), .q_in(q_bit), .sym(s_dqpsk)
  );

  pbm_oqpsk_mapper u_oqpsk (.i_in(i_bit), .q_in(q_dly), .sym(s_oqpsk));

  // MOD_SEL 4:1 multiplexer
  always_comb begin
    unique case (mod_sel)
      MOD_QPSK:     s_sel = s_qpsk;
      MOD_PI4DQPSK: s_sel = s_pi4;
      MOD_DQPSK:    s_sel = s_dqpsk;
      MOD_OQPSK:    s_sel = s_oqpsk;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      i_sym <= LVL_ZERO;
      q_sym <= LVL_ZERO;
      i_stb <= 1'b0;
      q_stb <= 1'b0;
    end else begin
      i_stb <= sym_stb;
      q_stb <= oqpsk ? q_dly_stb : sym_stb;
      if (sym_stb)
        i_sym <= s_sel.i;
      if (oqpsk ? q_dly_stb : sym_stb)
        q_sym <= s_sel.q;
    end
  end

  // outside OQPSK both rails move together
  a_rails_aligned: assert property (@(posedge clk) disable iff (!rst_n)
    (!$past(oqpsk) |-> (q_stb == i_stb)));

endmodule
