// pbm_rrc_filter: root-raised-cosine pulse-shaping filter and 1:4
// interpolator, built with distributed arithmetic.
//
// The filter is a 25-tap symmetric FIR, h0..h24, at four samples per symbol.
// Because only every fourth input sample is non-zero, output sample p of a
// symbol (p = 0..3) is a 7- or 6-term sum over the seven held symbols:
//   DOUT_p = sum_j h[4j + p] * ADD[j]
// Using h(24-k) = h(k), the terms are grouped into eight DA LUTs exactly as in
// the paper's filter drawing:
//   DOUT0 = LUT(ADD0..3: H0 H4 H8 H12)  + LUT(ADD4..6: H8 H4 H0)
//   DOUT1 = LUT(ADD0..3: H1 H5 H9 H11)  + LUT(ADD4..5: H7 H3)
//   DOUT2 = LUT(ADD0..3: H2 H6 H10 H10) + LUT(ADD4..5: H6 H2)
//   DOUT3 = LUT(ADD0..3: H3 H7 H11 H9)  + LUT(ADD4..5: H5 H1)
// Which LUT pairs feed which adder follows from those tap indices. The
// paper speaks of a 32-tap filter; its seven-symbol register and the tap
// indices of its drawing give 25 taps, which is what is built. FLT_SEL picks
// one of four tap sets (alpha 0.22, 0.35, 0.5, 0.9) inside every LUT.
//
// Timing: the four sums are combinational; dout registers DOUT[phase] every
// cycle, so a new output sample appears one cycle after add/phase change and
// the output rate is four samples per symbol. Reset clears dout.
module pbm_rrc_filter
  import pbm_pkg::*;
#(
  parameter int unsigned DW = DATA_W
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  lvl_e                 add [SR_DEPTH],
  input  logic [1:0]           phase,
  input  flt_sel_e             flt_sel,
  output logic signed [DW-1:0] dout
);

  lvl_e                 a_lo [4];   // ADD0..ADD3
  lvl_e                 a_h3 [3];   // ADD4..ADD6
  lvl_e                 a_h2 [2];   // ADD4..ADD5
  logic signed [DW-1:0] lo   [4];
  logic signed [DW-1:0] hi   [4];
  logic signed [DW-1:0] dsum [4];   // DOUT0..DOUT3

  always_comb begin
    for (int k = 0; k < 4; k++) a_lo[k] = add[k];
    for (int k = 0; k < 3; k++) a_h3[k] = add[4 + k];
    for (int k = 0; k < 2; k++) a_h2[k] = add[4 + k];
  end

  pbm_dalut #(.N(4), .IDX('{0, 4,  8, 12}), .DW(DW)) u_lut0 (.addr(a_lo), .flt_sel, .dout(lo[0]));
  pbm_dalut #(.N(4), .IDX('{1, 5,  9, 11}), .DW(DW)) u_lut1 (.addr(a_lo), .flt_sel, .dout(lo[1]));
  pbm_dalut #(.N(4), .IDX('{2, 6, 10, 10}), .DW(DW)) u_lut2 (.addr(a_lo), .flt_sel, .dout(lo[2]));
  pbm_dalut #(.N(4), .IDX('{3, 7, 11,  9}), .DW(DW)) u_lut3 (.addr(a_lo), .flt_sel, .dout(lo[3]));
  pbm_dalut #(.N(3), .IDX('{8, 4,  0,  0}), .DW(DW)) u_lut4 (.addr(a_h3), .flt_sel, .dout(hi[0]));
  pbm_dalut #(.N(2), .IDX('{7, 3,  0,  0}), .DW(DW)) u_lut5 (.addr(a_h2), .flt_sel, .dout(hi[1]));
  pbm_dalut #(.N(2), .IDX('{6, 2,  0,  0}), .DW(DW)) u_lut6 (.addr(a_h2), .flt_sel, .dout(hi[2]));
  pbm_dalut #(.N(2), .IDX('{5, 1,  0,  0}), .DW(DW)) u_lut7 (.addr(a_h2), .flt_sel, .dout(hi[3]));

  always_comb begin
    for (int p = 0; p < 4; p++) dsum[p] = lo[p] + hi[p];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) dout <= '0;
    else        dout <= dsum[phase];
  end

endmodule
