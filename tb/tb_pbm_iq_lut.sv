// tb_pbm_iq_lut: all eight phases against cos/sin of k*pi/4.
module tb_pbm_iq_lut;
  import pbm_pkg::*;
  import tb_pbm_ref_pkg::*;
  logic [2:0] phase;
  iq_sym_t    sym, ref_sym;
  int         checks = 0, failures = 0;

  pbm_iq_lut dut (.phase, .sym);

  initial begin
    for (int k = 0; k < 8; k++) begin
      phase = 3'(k);
      #1;
      ref_sym = sym_of_angle(k * PI / 4.0);
      checks++;
      if (sym !== ref_sym) begin
        failures++;
        $display("FAIL phase %0d: got %s/%s want %s/%s", k, sym.i.name(), sym.q.name(),
                 ref_sym.i.name(), ref_sym.q.name());
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
