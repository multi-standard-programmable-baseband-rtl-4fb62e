// tb_pbm_pi4dqpsk_mapper: random bit pairs; the reference accumulates the
// phase steps of the pi/4 DQPSK table (00 -> pi/4, 01 -> 3pi/4,
// 10 -> 5pi/4, 11 -> 7pi/4) in radians and takes cos/sin. Also checks that
// the symbols alternate between axis and diagonal points.
module tb_pbm_pi4dqpsk_mapper;
  import pbm_pkg::*;
  import tb_pbm_ref_pkg::*;
  logic    clk = 1'b0, rst_n = 1'b0, en = 1'b0, i_in = 1'b0, q_in = 1'b0;
  iq_sym_t sym, ref_sym;
  int      checks = 0, failures = 0;
  real     theta = 0.0;
  real     step [4] = '{PI / 4.0, 3.0 * PI / 4.0, 5.0 * PI / 4.0, 7.0 * PI / 4.0};
  bit      diag, prev_diag;

  pbm_pi4dqpsk_mapper dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    for (int n = 0; n < 300; n++) begin
      @(negedge clk);
      {i_in, q_in} = 2'($urandom);
      en = 1'b1;
      theta += step[{i_in, q_in}];
      #1;
      ref_sym = sym_of_angle(theta);
      checks++;
      if (sym !== ref_sym) begin
        failures++;
        $display("FAIL symbol %0d", n);
      end
      diag = (sym.i == LVL_P707 || sym.i == LVL_N707);
      if (n > 0) begin
        checks++;
        if (diag == prev_diag) begin
          failures++;
          $display("FAIL no pi/4 alternation at %0d", n);
        end
      end
      prev_diag = diag;
      @(negedge clk) en = 1'b0;   // idle cycle: state must hold
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : watchdog
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
