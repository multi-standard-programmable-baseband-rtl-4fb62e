// tb_pbm_qpsk_mapper: the four bit pairs against the QPSK phase table
// (00 -> 0, 01 -> pi/2, 10 -> pi, 11 -> 3pi/2).
module tb_pbm_qpsk_mapper;
  import pbm_pkg::*;
  import tb_pbm_ref_pkg::*;
  logic    i_in, q_in;
  iq_sym_t sym, ref_sym;
  int      checks = 0, failures = 0;
  real     table_phase [4] = '{0.0, PI / 2.0, PI, 3.0 * PI / 2.0};

  pbm_qpsk_mapper dut (.i_in, .q_in, .sym);

  initial begin
    for (int b = 0; b < 4; b++) begin
      {i_in, q_in} = 2'(b);
      #1;
      ref_sym = sym_of_angle(table_phase[b]);
      checks++;
      if (sym !== ref_sym) begin
        failures++;
        $display("FAIL IQ=%02b", b);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : watchdog
    #1000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
