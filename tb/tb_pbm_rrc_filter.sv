// tb_pbm_rrc_filter: random seven-symbol windows and sample phases under
// every roll-off. The output one cycle later must equal the direct-form
// convolution of the zero-stuffed symbol stream with the 25-tap response.
// Also checks the filter's unit response: a single +1 symbol walked through
// the window reproduces h0..h24 in order.
module tb_pbm_rrc_filter;
  import pbm_pkg::*;
  import tb_pbm_ref_pkg::*;
  logic               clk = 1'b0, rst_n = 1'b0;
  lvl_e               add [SR_DEPTH];
  logic [1:0]         phase = '0;
  flt_sel_e           flt_sel = FLT_A022;
  logic signed [15:0] dout;
  int                 checks = 0, failures = 0;
  int                 expv;

  pbm_rrc_filter dut (.*);

  always #5 clk = ~clk;

  task automatic apply_and_check(int want);
    @(negedge clk);
    checks++;
    if (int'(dout) != want) begin
      failures++;
      $display("FAIL flt %0d phase %0d: got %0d want %0d", flt_sel, phase, dout, want);
    end
  endtask

  initial begin
    for (int k = 0; k < SR_DEPTH; k++) add[k] = LVL_ZERO;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    // impulse response
    for (int f = 0; f < 4; f++) begin
      flt_sel = flt_sel_e'(f);
      for (int n = 0; n < 28; n++) begin
        for (int k = 0; k < SR_DEPTH; k++) add[k] = (k == n / 4) ? LVL_P1 : LVL_ZERO;
        phase = 2'(n % 4);
        apply_and_check(h_full(f, n));
      end
    end
    // random windows
    for (int n = 0; n < 3000; n++) begin
      flt_sel = flt_sel_e'($urandom % 4);
      for (int k = 0; k < SR_DEPTH; k++) add[k] = lvl_e'($urandom % 5);
      phase = 2'($urandom);
      expv = fir_ref(int'(flt_sel), add, int'(phase));
      apply_and_check(expv);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : watchdog
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
