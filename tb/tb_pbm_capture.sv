// tb_pbm_capture: the capture experiments of the published prototype,
// replayed in simulation. For each setting the modulator is reset, fed random
// serial data and 512 consecutive output samples of both rails are taken,
// as the prototype's logic-analyser capture did:
//   MOD_SEL=1, FLT_SEL=1  (pi/4 DQPSK, alpha 0.35)
//   MOD_SEL=2, FLT_SEL=1  (DQPSK, alpha 0.35)
//   MOD_SEL=1, FLT_SEL=0  (pi/4 DQPSK, alpha 0.22)
// Every captured sample is compared with the direct-form reference. The
// constellation is also checked: the sample at the peak of a symbol's pulse
// (sample phase 0, symbol three periods back) must have the sign of that
// symbol on each rail whenever the symbol's amplitude is non-zero, i.e. the
// eye is open. The range of each rail is printed for comparison with the
// published constellation plots.
module tb_pbm_capture;
  import pbm_pkg::*;
  import tb_pbm_ref_pkg::*;

  logic               clk = 1'b0, rst_n = 1'b0, ser_in = 1'b0;
  mod_sel_e           mod_sel = MOD_PI4DQPSK;
  flt_sel_e           flt_sel = FLT_A035;
  logic               bit_en;
  logic signed [15:0] irail, qrail, finalout;
  logic [1:0]         cphase;

  pbm_top dut (.*);

  always #5 clk = ~clk;

  localparam int NCAP = 512;

  int checks = 0, failures = 0;
  int cyc = 0, nbits = 0, ncap = 0;
  bit capturing = 1'b0;

  int exp_i [int];
  int exp_q [int];
  int pk_i  [int];   // sign expected at a pulse peak (+1, -1, 0 = none)
  int pk_q  [int];

  mapper_model mm;
  lvl_e hist_i [7];
  lvl_e hist_q [7];
  bit   first_bit;
  int   imin, imax, qmin, qmax, peaks;

  function automatic int sgn(lvl_e l);
    case (l)
      LVL_P1, LVL_P707: return 1;
      LVL_N1, LVL_N707: return -1;
      default:          return 0;
    endcase
  endfunction

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s at cycle %0d", what, cyc);
    end
  endtask

  always @(negedge clk) if (rst_n) begin
    ser_in = 1'($urandom);
    if (bit_en) begin
      if (nbits % 2 == 0) begin
        first_bit = ser_in;
      end else begin
        iq_sym_t s;
        s = mm.map(mod_sel, first_bit, ser_in);
        for (int k = 6; k > 0; k--) begin
          hist_i[k] = hist_i[k-1];
          hist_q[k] = hist_q[k-1];
        end
        hist_i[0] = s.i;
        hist_q[0] = s.q;
        for (int p = 0; p < 4; p++) begin
          exp_i[cyc + 4 + p] = fir_ref(int'(flt_sel), hist_i, p);
          exp_q[cyc + 4 + p] = fir_ref(int'(flt_sel), hist_q, p);
        end
        pk_i[cyc + 4] = sgn(hist_i[3]);
        pk_q[cyc + 4] = sgn(hist_q[3]);
      end
      nbits++;
    end
  end

  always @(posedge clk) if (rst_n) begin
    if (capturing && ncap < NCAP && exp_i.exists(cyc)) begin
      check(int'(irail) == exp_i[cyc], "IRAIL sample");
      check(int'(qrail) == exp_q[cyc], "QRAIL sample");
      if (pk_i.exists(cyc)) begin
        if (pk_i[cyc] != 0) check(pk_i[cyc] * int'(irail) > 0, "I eye open");
        if (pk_q[cyc] != 0) check(pk_q[cyc] * int'(qrail) > 0, "Q eye open");
        peaks++;
      end
      if (int'(irail) < imin) imin = int'(irail);
      if (int'(irail) > imax) imax = int'(irail);
      if (int'(qrail) < qmin) qmin = int'(qrail);
      if (int'(qrail) > qmax) qmax = int'(qrail);
      ncap++;
    end
    cyc++;
  end

  task automatic run(mod_sel_e m, flt_sel_e f);
    rst_n = 1'b0;
    mod_sel = m;
    flt_sel = f;
    mm = new();
    for (int k = 0; k < 7; k++) begin
      hist_i[k] = LVL_ZERO;
      hist_q[k] = LVL_ZERO;
    end
    exp_i.delete();
    exp_q.delete();
    pk_i.delete();
    pk_q.delete();
    nbits = 0;
    ncap = 0;
    peaks = 0;
    imin = 0; imax = 0; qmin = 0; qmax = 0;
    repeat (3) @(posedge clk);
    @(negedge clk);
    cyc = 0;
    rst_n = 1'b1;
    // skip the first seven symbols, while the window still holds reset zeros
    repeat (40) @(posedge clk);
    capturing = 1'b1;
    wait (ncap == NCAP);
    capturing = 1'b0;
    $display("MOD_SEL=%0d FLT_SEL=%0d: %0d samples, %0d pulse peaks, IRAIL %0d..%0d, QRAIL %0d..%0d",
             m, f, ncap, peaks, imin, imax, qmin, qmax);
    check(peaks == NCAP / 4, "one pulse peak per symbol");
  endtask

  initial begin
    run(MOD_PI4DQPSK, FLT_A035);
    run(MOD_DQPSK, FLT_A035);
    run(MOD_PI4DQPSK, FLT_A022);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : watchdog
    repeat (3 * (NCAP + 200)) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
