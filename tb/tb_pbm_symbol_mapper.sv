// tb_pbm_symbol_mapper: drives bit pairs on the data generator's schedule
// (sym_stb every four cycles, q_dly_stb two cycles later) and switches
// MOD_SEL every 40 symbols without reset. For every symbol it checks the
// registered I and Q outputs against an independent model of each
// modulation (QPSK table, pi/4 DQPSK phase accumulation, DQPSK complex
// rotation, OQPSK +-0.707), that both rails move together outside OQPSK and
// that in OQPSK the Q rail is loaded two cycles after the I rail.
module tb_pbm_symbol_mapper;
  import pbm_pkg::*;
  import tb_pbm_ref_pkg::*;
  logic     clk = 1'b0, rst_n = 1'b0;
  mod_sel_e mod_sel = MOD_QPSK;
  logic     i_bit = 1'b0, q_bit = 1'b0, sym_stb = 1'b0, q_dly = 1'b0, q_dly_stb = 1'b0;
  lvl_e     i_sym, q_sym;
  logic     i_stb, q_stb;
  int       checks = 0, failures = 0;
  int       mode_seen [4] = '{0, 0, 0, 0};
  int       switches = 0;

  pbm_symbol_mapper dut (.*);

  always #5 clk = ~clk;

  // model state
  iq_sym_t want;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s (mode %s)", what, mod_sel.name());
    end
  endtask

  mapper_model mm = new();

  initial begin
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    for (int n = 0; n < 640; n++) begin
      if (n % 40 == 0 && n > 0) begin
        mod_sel = mod_sel_e'((int'(mod_sel) + 1) % 4);
        switches++;
      end
      // cycle 0: new pair with sym_stb
      @(negedge clk);
      i_bit = 1'($urandom);
      q_bit = 1'($urandom);
      sym_stb = 1'b1;
      want = mm.map(mod_sel, i_bit, q_bit);
      // cycle 1: I rail (and Q rail outside OQPSK) updated
      @(negedge clk);
      sym_stb = 1'b0;
      check(i_stb == 1'b1, "i_stb one cycle after sym_stb");
      check(i_sym == want.i, "I symbol");
      if (mod_sel != MOD_OQPSK) begin
        check(q_stb == 1'b1, "q_stb with i_stb");
        check(q_sym == want.q, "Q symbol");
      end else begin
        check(q_stb == 1'b0, "no q_stb with i_stb in OQPSK");
      end
      // cycle 2: delayed Q bit offered in OQPSK
      @(negedge clk);
      if (mod_sel == MOD_OQPSK) begin
        q_dly = q_bit;
        q_dly_stb = 1'b1;
      end
      // cycle 3: OQPSK Q rail updated, two cycles after the I rail
      @(negedge clk);
      q_dly_stb = 1'b0;
      if (mod_sel == MOD_OQPSK) begin
        check(q_stb == 1'b1, "OQPSK Q rail two cycles after I rail");
        check(q_sym == want.q, "OQPSK Q symbol");
      end
      mode_seen[mod_sel]++;
    end
    for (int m = 0; m < 4; m++) check(mode_seen[m] > 0, "every MOD_SEL exercised");
    check(switches > 0, "mode switch exercised");
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
