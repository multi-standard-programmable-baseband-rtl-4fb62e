// tb_pbm_dalut: a 4-input table (taps H0 H4 H8 H12) and a 3-input table
// (H8 H4 H0) of the filter, addressed with random symbols under every
// FLT_SEL; the reference sums the tap-times-amplitude products directly.
module tb_pbm_dalut;
  import pbm_pkg::*;
  import tb_pbm_ref_pkg::*;
  lvl_e                 a4 [4];
  lvl_e                 a3 [3];
  flt_sel_e             flt_sel;
  logic signed [15:0]   d4, d3;
  int                   checks = 0, failures = 0;
  int                   idx4 [4] = '{0, 4, 8, 12};
  int                   idx3 [3] = '{8, 4, 0};
  int                   exp4, exp3;

  pbm_dalut #(.N(4), .IDX('{0, 4, 8, 12})) dut4 (.addr(a4), .flt_sel, .dout(d4));
  pbm_dalut #(.N(3), .IDX('{8, 4, 0, 0}))  dut3 (.addr(a3), .flt_sel, .dout(d3));

  initial begin
    #1;
    for (int n = 0; n < 2000; n++) begin
      flt_sel = flt_sel_e'($urandom % 4);
      for (int k = 0; k < 4; k++) a4[k] = lvl_e'($urandom % 5);
      for (int k = 0; k < 3; k++) a3[k] = lvl_e'($urandom % 5);
      #1;
      exp4 = 0;
      exp3 = 0;
      for (int k = 0; k < 4; k++) exp4 += prod(h_full(int'(flt_sel), idx4[k]), a4[k]);
      for (int k = 0; k < 3; k++) exp3 += prod(h_full(int'(flt_sel), idx3[k]), a3[k]);
      checks += 2;
      if (int'(d4) != exp4) begin
        failures++;
        $display("FAIL 4-input: got %0d want %0d", d4, exp4);
      end
      if (int'(d3) != exp3) begin
        failures++;
        $display("FAIL 3-input: got %0d want %0d", d3, exp3);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : watchdog
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
