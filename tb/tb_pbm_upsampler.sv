// tb_pbm_upsampler: random symbols, one every four cycles. Checks that
// ADD[k] holds the symbol k periods old and that the sample phase runs
// 0, 1, 2, 3 after every shift.
module tb_pbm_upsampler;
  import pbm_pkg::*;
  logic       clk = 1'b0, rst_n = 1'b0, sym_en = 1'b0;
  lvl_e       sym_in = LVL_ZERO;
  lvl_e       add [SR_DEPTH];
  logic [1:0] phase;
  int         checks = 0, failures = 0;
  lvl_e       hist [SR_DEPTH];

  pbm_upsampler dut (.*);

  always #5 clk = ~clk;

  initial begin
    for (int k = 0; k < SR_DEPTH; k++) hist[k] = LVL_ZERO;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    for (int n = 0; n < 200; n++) begin
      @(negedge clk);
      sym_en = 1'b1;
      sym_in = lvl_e'($urandom % 5);
      for (int k = SR_DEPTH - 1; k > 0; k--) hist[k] = hist[k-1];
      hist[0] = sym_in;
      for (int p = 0; p < 4; p++) begin
        @(negedge clk);
        sym_en = 1'b0;
        checks++;
        if (phase != 2'(p)) begin
          failures++;
          $display("FAIL phase %0d want %0d (symbol %0d)", phase, p, n);
        end
        for (int k = 0; k < SR_DEPTH; k++) begin
          checks++;
          if (add[k] != hist[k]) begin
            failures++;
            $display("FAIL ADD[%0d] symbol %0d", k, n);
          end
        end
        if (p == 2) break;   // the next symbol is loaded in the 4th cycle
      end
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
