// tb_pbm_carrier_gen: random rail samples every cycle; the output one cycle
// later must be I cos + Q sin with cos = 1, 0, -1, 0 and sin = 0, 1, 0, -1
// for the reported carrier phase, and that phase must advance by one every
// cycle (carrier at a quarter of the sample rate).
module tb_pbm_carrier_gen;
  logic               clk = 1'b0, rst_n = 1'b0;
  logic signed [15:0] i_in = '0, q_in = '0, dout;
  logic [1:0]         cphase;
  int                 checks = 0, failures = 0;
  int                 pi_v, pq_v, c, s, want;
  logic [1:0]         last_ph;
  int                 cosv [4] = '{1, 0, -1, 0};
  int                 sinv [4] = '{0, 1, 0, -1};

  pbm_carrier_gen dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    for (int n = 0; n < 1000; n++) begin
      i_in = 16'($signed($urandom % 16001) - 8000);
      q_in = 16'($signed($urandom % 16001) - 8000);
      pi_v = int'(i_in);
      pq_v = int'(q_in);
      @(negedge clk);
      want = pi_v * cosv[cphase] + pq_v * sinv[cphase];
      checks++;
      if (int'(dout) != want) begin
        failures++;
        $display("FAIL cycle %0d phase %0d: got %0d want %0d", n, cphase, dout, want);
      end
      if (n > 0) begin
        checks++;
        if (cphase != last_ph + 2'd1) begin
          failures++;
          $display("FAIL carrier phase did not advance");
        end
      end
      last_ph = cphase;
    end
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
