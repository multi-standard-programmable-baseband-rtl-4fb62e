// tb_pbm_dqpsk_mapper: random bit pairs. The reference treats a bit pair as
// the point (1-2I, 1-2Q) and forms the encoded point as the input rotated by
// the phase of the previous encoded point minus pi/4, using complex
// arithmetic; it then checks the rails are the antipodal +-1 amplitudes of
// the encoded bits.
module tb_pbm_dqpsk_mapper;
  import pbm_pkg::*;
  logic    clk = 1'b0, rst_n = 1'b0, en = 1'b0, i_in = 1'b0, q_in = 1'b0;
  iq_sym_t sym;
  int      checks = 0, failures = 0;
  int      pr = 1, pi = 1;   // previous encoded point, starts at (+1,+1)
  int      a, b, x, y, er, ei;

  pbm_dqpsk_mapper dut (.*);

  always #5 clk = ~clk;

  function automatic lvl_e amp(int v);
    return (v > 0) ? LVL_P1 : LVL_N1;
  endfunction

  initial begin
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    for (int n = 0; n < 300; n++) begin
      @(negedge clk);
      {i_in, q_in} = 2'($urandom);
      en = ($urandom % 4) != 0;   // some cycles without en: state holds
      a = 1 - 2 * int'(i_in);
      b = 1 - 2 * int'(q_in);
      // (a+jb)(pr+j pi)
      x = a * pr - b * pi;
      y = a * pi + b * pr;
      // times (1-j)/2 : rotate by -pi/4 and rescale
      er = (x + y) / 2;
      ei = (y - x) / 2;
      #1;
      checks++;
      if (sym.i !== amp(er) || sym.q !== amp(ei)) begin
        failures++;
        $display("FAIL symbol %0d", n);
      end
      if (en) begin
        pr = er;
        pi = ei;
      end
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
