// tb_pbm_oqpsk_mapper: each rail must be +0.707 for bit 0, -0.707 for bit 1.
module tb_pbm_oqpsk_mapper;
  import pbm_pkg::*;
  logic    i_in, q_in;
  iq_sym_t sym;
  int      checks = 0, failures = 0;

  pbm_oqpsk_mapper dut (.i_in, .q_in, .sym);

  initial begin
    for (int b = 0; b < 4; b++) begin
      {i_in, q_in} = 2'(b);
      #1;
      checks += 2;
      if (sym.i !== (i_in ? LVL_N707 : LVL_P707)) begin
        failures++;
        $display("FAIL I for IQ=%02b", b);
      end
      if (sym.q !== (q_in ? LVL_N707 : LVL_P707)) begin
        failures++;
        $display("FAIL Q for IQ=%02b", b);
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
