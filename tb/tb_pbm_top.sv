// tb_pbm_top: end-to-end test of the modulator at its default parameters.
//
// A random serial stream is fed at the rate the data generator asks for
// (bit_en). MOD_SEL and FLT_SEL step through all sixteen combinations
// without reset, 40 symbols each. An independent model maps every bit pair
// to I/Q amplitudes for the selected modulation, keeps its own seven-symbol
// history per rail and computes the pulse-shaped samples by direct
// convolution; these must appear on irail/qrail exactly four cycles after
// the pair's second bit is taken (six cycles on the OQPSK Q rail, which runs
// half a symbol late). After each switch the first eight symbols are not
// compared while old symbols leave the filter. finalout is checked against
// I, Q, -I, -Q of the previous cycle's rails at the reported carrier phase,
// which must advance every cycle. Counted mechanisms: each modulation, each
// roll-off, mode switches, and the OQPSK half-symbol offset.
module tb_pbm_top;
  import pbm_pkg::*;
  import tb_pbm_ref_pkg::*;

  logic               clk = 1'b0, rst_n = 1'b0, ser_in = 1'b0;
  mod_sel_e           mod_sel = MOD_QPSK;
  flt_sel_e           flt_sel = FLT_A022;
  logic               bit_en;
  logic signed [15:0] irail, qrail, finalout;
  logic [1:0]         cphase;

  pbm_top dut (.*);

  always #5 clk = ~clk;

  localparam int SYMS_PER_SEG = 40;
  localparam int SETTLE_SYMS  = 8;

  int checks = 0, failures = 0;
  int cyc = 0, nbits = 0, nsym = 0, nbit_en = 0, run_cycles = 0;
  int settle_until = 0;
  int mod_checked [4] = '{0, 0, 0, 0};
  int flt_checked [4] = '{0, 0, 0, 0};
  int switches = 0, oqpsk_offset_checked = 0;

  int exp_i [int];
  int exp_q [int];
  int exp_mod [int];
  int exp_flt [int];

  // reference state
  lvl_e hist_i [7];
  lvl_e hist_q [7];
  bit   first_bit;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s at cycle %0d", what, cyc);
    end
  endtask

  mapper_model mm = new();

  // driver and reference model: runs in the middle of each cycle
  always @(negedge clk) if (rst_n) begin
    ser_in = 1'($urandom);
    if (bit_en) begin
      if (nbits % 2 == 0) begin
        first_bit = ser_in;
      end else begin
        // the pair completes at the end of this cycle (cyc); a new segment
        // starts with this symbol
        iq_sym_t s;
        int qoff;
        if (nsym % SYMS_PER_SEG == 0 && nsym > 0) begin
          int seg;
          seg = nsym / SYMS_PER_SEG;
          mod_sel = mod_sel_e'(seg % 4);
          flt_sel = flt_sel_e'((seg / 4) % 4);
          switches++;
          settle_until = cyc + 4 * SETTLE_SYMS + 8;
        end
        s = mm.map(mod_sel, first_bit, ser_in);
        for (int k = 6; k > 0; k--) begin
          hist_i[k] = hist_i[k-1];
          hist_q[k] = hist_q[k-1];
        end
        hist_i[0] = s.i;
        hist_q[0] = s.q;
        qoff = (mod_sel == MOD_OQPSK) ? 6 : 4;
        for (int p = 0; p < 4; p++) begin
          exp_i[cyc + 4 + p] = fir_ref(int'(flt_sel), hist_i, p);
          exp_q[cyc + qoff + p] = fir_ref(int'(flt_sel), hist_q, p);
          exp_mod[cyc + 4 + p] = int'(mod_sel);
          exp_flt[cyc + 4 + p] = int'(flt_sel);
        end
        nsym++;
      end
      nbits++;
    end
  end

  // checker: sees the values of the cycle that ends at this edge
  logic signed [15:0] prev_i = '0, prev_q = '0;
  logic [1:0]         prev_cph = '0;
  int                 want_f;

  always @(posedge clk) if (rst_n) begin
    if (bit_en) nbit_en++;
    if (cyc > settle_until && exp_i.exists(cyc) && exp_q.exists(cyc)) begin
      check(int'(irail) == exp_i[cyc], "irail sample");
      check(int'(qrail) == exp_q[cyc], "qrail sample");
      mod_checked[exp_mod[cyc]]++;
      flt_checked[exp_flt[cyc]]++;
      if (exp_mod[cyc] == int'(MOD_OQPSK)) oqpsk_offset_checked++;
    end
    if (cyc > 1) begin
      case (cphase)
        2'd0: want_f = int'(prev_i);
        2'd1: want_f = int'(prev_q);
        2'd2: want_f = -int'(prev_i);
        default: want_f = -int'(prev_q);
      endcase
      check(int'(finalout) == want_f, "finalout = I, Q, -I, -Q");
      check(cphase == prev_cph + 2'd1, "carrier at a quarter of the sample rate");
    end
    prev_i   = irail;
    prev_q   = qrail;
    prev_cph = cphase;
    cyc++;
  end

  initial begin
    for (int k = 0; k < 7; k++) begin
      hist_i[k] = LVL_ZERO;
      hist_q[k] = LVL_ZERO;
    end
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    wait (nsym == 16 * SYMS_PER_SEG + 2);
    repeat (12) @(posedge clk);
    run_cycles = cyc;
    // throughput: one serial bit every two cycles
    check(nbit_en >= run_cycles / 2 - 1 && nbit_en <= run_cycles / 2 + 1, "bit rate");
    for (int m = 0; m < 4; m++) begin
      $display("MOD_SEL=%0d samples checked: %0d", m, mod_checked[m]);
      check(mod_checked[m] > 0, "every modulation exercised");
    end
    for (int f = 0; f < 4; f++) begin
      $display("FLT_SEL=%0d samples checked: %0d", f, flt_checked[f]);
      check(flt_checked[f] > 0, "every roll-off exercised");
    end
    $display("mode switches: %0d, OQPSK offset samples: %0d", switches, oqpsk_offset_checked);
    check(switches >= 15, "mode switches exercised");
    check(oqpsk_offset_checked > 0, "OQPSK half-symbol offset exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
