// pbm_upsampler: 1:4 upsampler and DA address generator.
//
// A chain of seven symbol registers (SR) is shifted once per symbol; tap k,
// ADD[k], holds the symbol k periods old (ADD[0] newest). These seven 3-bit
// symbols address the distributed-arithmetic LUTs of the RRC filter, as in the
// paper. The upsampling itself is the 2-bit output phase: it is 0 in the
// cycle after a shift and counts 1, 2, 3 in the next cycles, so the filter
// emits four samples per symbol from one register content.
//
// Interface and timing: sym_en pulses once every four cycles with the new
// symbol on sym_in; add and phase change in the next cycle. A pulse that
// comes early or late (only at a switch into or out of OQPSK, whose Q rail
// runs half a symbol late) simply restarts the phase count. Reset clears the
// registers to amplitude 0.
module pbm_upsampler
  import pbm_pkg::*;
#(
  parameter int unsigned DEPTH = SR_DEPTH
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       sym_en,
  input  lvl_e       sym_in,
  output lvl_e       add [DEPTH],   // ADD[0..DEPTH-1]
  output logic [1:0] phase          // output sample index within the symbol
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < DEPTH; k++) add[k] <= LVL_ZERO;
      phase <= '0;
    end else begin
      if (sym_en) begin
        add[0] <= sym_in;
        for (int k = 1; k < DEPTH; k++) add[k] <= add[k-1];
        phase <= '0;
      end else begin
        phase <= phase + 2'd1;
      end
    end
  end

endmodule
