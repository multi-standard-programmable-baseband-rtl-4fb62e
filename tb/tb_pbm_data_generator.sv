// tb_pbm_data_generator: checks the serial-to-parallel split, the symbol
// strobe rate (one symbol per four cycles, one bit per two) and the one-bit
// (two-cycle) delay of the OQPSK Q stream.
module tb_pbm_data_generator;
  logic clk = 1'b0, rst_n = 1'b0, ser_in = 1'b0;
  logic bit_en, i_bit, q_bit, sym_stb, q_dly, q_dly_stb;
  int   checks = 0, failures = 0;

  pbm_data_generator dut (.*);

  always #5 clk = ~clk;

  bit sent [$];
  int cyc = 0, nsym = 0, last_sym_cyc = -1, nbit_en = 0;
  bit last_q = 1'b0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s at cycle %0d", what, cyc);
    end
  endtask

  // driver: a new random bit every cycle; the ones with bit_en are taken
  always @(negedge clk) if (rst_n) begin
    ser_in = 1'($urandom);
    if (bit_en) sent.push_back(ser_in);
  end

  always @(posedge clk) if (rst_n) begin
    if (bit_en) nbit_en++;
    if (sym_stb) begin
      check(i_bit == sent[2*nsym],   "even bit on I");
      check(q_bit == sent[2*nsym+1], "odd bit on Q");
      if (last_sym_cyc >= 0) check(cyc - last_sym_cyc == 4, "symbol period 4 cycles");
      last_sym_cyc = cyc;
      last_q = q_bit;
      nsym++;
    end
    if (q_dly_stb && nsym > 0) begin
      check(q_dly == last_q, "delayed Q value");
      check(cyc - last_sym_cyc == 2, "Q delay of one bit period");
    end
    cyc++;
  end

  initial begin
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    wait (nsym == 200);
    @(posedge clk);
    check(nbit_en >= 2 * nsym && nbit_en <= 2 * nsym + 2, "bit rate one per two cycles");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
