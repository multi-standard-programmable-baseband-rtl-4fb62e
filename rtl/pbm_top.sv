// pbm_top: programmable baseband modulator for the QPSK family.
//
// One datapath serves four modulations (QPSK, pi/4 DQPSK, DQPSK, OQPSK,
// chosen by mod_sel) and four RRC roll-offs (0.22, 0.35, 0.5, 0.9, chosen by
// flt_sel):
//   ser_in -> data generator (bit split, OQPSK half-symbol delay)
//          -> symbol mapper (3-bit I and Q amplitudes)
//          -> per rail: 7-symbol upsampler -> DA polyphase RRC filter (1:4)
//          -> carrier generator at fs/4 -> finalout
// The chain follows the paper's block diagram. The clocking (one clock, a
// symbol every four cycles, a bit every two) is this design's choice.
//
// Interface: drive a new ser_in bit after every cycle in which bit_en is
// high. irail / qrail are the pulse-shaped rails at one sample per clock;
// finalout is the IF signal, I, Q, -I, -Q in turn. mod_sel and flt_sel may
// change at any time; the outputs settle after seven symbols.
//
// Latency (I rail): a bit pair taken at the second bit_en of a symbol gives
// its first pulse-shaped sample (sample phase 0, newest symbol ADD0) four
// cycles later on irail and five cycles later on finalout. In OQPSK mode the
// Q rail runs two cycles (half a symbol) behind the I rail.
module pbm_top
  import pbm_pkg::*;
#(
  parameter int unsigned DW = DATA_W
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 ser_in,    // serial message bits
  input  mod_sel_e             mod_sel,   // MOD_SEL
  input  flt_sel_e             flt_sel,   // FLT_SEL
  output logic                 bit_en,    // ser_in taken this cycle
  output logic signed [DW-1:0] irail,     // I pulse shaped
  output logic signed [DW-1:0] qrail,     // Q pulse shaped
  output logic signed [DW-1:0] finalout,  // modulated output
  output logic [1:0]           cphase     // carrier phase of finalout
);

  logic i_bit, q_bit, sym_stb, q_dly, q_dly_stb;
  lvl_e i_sym, q_sym;
  logic i_stb, q_stb;
  lvl_e i_add [SR_DEPTH];
  lvl_e q_add [SR_DEPTH];
  logic [1:0] i_phase, q_phase;

  pbm_data_generator u_dg (
    .clk, .rst_n, .ser_in, .bit_en,
    .i_bit, .q_bit, .sym_stb, .q_dly, .q_dly_stb
  );

  pbm_symbol_mapper u_map (
    .clk, .rst_n, .mod_sel,
    .i_bit, .q_bit, .sym_stb, .q_dly, .q_dly_stb,
    .i_sym, .q_sym, .i_stb, .q_stb
  );

  pbm_upsampler u_up_i (.clk, .rst_n, .sym_en(i_stb), .sym_in(i_sym), .add(i_add), .phase(i_phase));
  pbm_upsampler u_up_q (.clk, .rst_n, .sym_en(q_stb), .sym_in(q_sym), .add(q_add), .phase(q_phase));

  pbm_rrc_filter #(.DW(DW)) u_rrc_i (
    .clk, .rst_n, .add(i_add), .phase(i_phase), .flt_sel, .dout(irail)
  );
  pbm_rrc_filter #(.DW(DW)) u_rrc_q (
    .clk, .rst_n, .add(q_add), .phase(q_phase), .flt_sel, .dout(qrail)
  );

  pbm_carrier_gen #(.DW(DW)) u_cg (
    .clk, .rst_n, .i_in(irail), .q_in(qrail), .dout(finalout), .cphase
  );

endmodule
