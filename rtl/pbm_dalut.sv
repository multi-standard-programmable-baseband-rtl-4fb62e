// pbm_dalut: distributed-arithmetic look-up table of the RRC filter.
//
// Instead of multiplying, the LUT holds the pre-computed sum of partial
// products  sum_k h[IDX[k]] * x_k  for every combination of its N input
// symbols x_k, and is addressed by the concatenated 3-bit amplitude codes of
// those symbols (ADD0 in the low bits). There is one such table per roll-off
// and a 4:1 multiplexer driven by FLT_SEL picks the one in use, as in the
// paper's DALUT drawing. Tables are filled at start-up from the tap constants
// in pbm_pkg, so they act as ROMs; the 0.707 partial products are rounded as
// pbm_pkg::lvl_times describes.
//
// Parameters: N inputs (2..4), IDX the stored tap index h0..h12 that weights
// each input, DW the output width. Read is combinational.
module pbm_dalut
  import pbm_pkg::*;
#(
  parameter int unsigned N        = 4,
  parameter int unsigned IDX [4]  = '{0, 4, 8, 12},
  parameter int unsigned DW       = DATA_W
) (
  input  lvl_e                 addr [N],
  input  flt_sel_e             flt_sel,
  output logic signed [DW-1:0] dout
);

  localparam int unsigned AW = 3 * N;

  logic signed [DW-1:0] rom [NUM_FILTERS][2**AW];
  logic [AW-1:0]        a;

  // table contents: one entry per combination of input codes
  initial begin
    for (int f = 0; f < NUM_FILTERS; f++) begin
      for (int j = 0; j < 2**AW; j++) begin
        int s;
        s = 0;
        for (int k = 0; k < N; k++)
          s += lvl_times(RRC_COEF[f][IDX[k]], 3'(j >> (3 * k)));
        rom[f][j] = DW'(s);
      end
    end
  end

  always_comb begin
    for (int k = 0; k < N; k++) a[3*k +: 3] = addr[k];
  end

  assign dout = rom[flt_sel][a];

endmodule
