// pbm_carrier_gen: carrier generator (the "CG") at one quarter of the sample
// rate.
//
// With the IF at fs/4, cos(wc t) runs through 1, 0, -1, 0 and sin(wc t)
// through 0, 1, 0, -1, so Y = I cos + Q sin reduces to picking I, Q, -I, -Q
// in turn: a 4:1 multiplexer fed by the two rails and their two's
// complements, with no multiplier or adder, as the paper describes. A
// free-running 2-bit counter drives the multiplexer; its starting point after
// reset (carrier phase 0 in the first cycle) is this design's choice.
//
// Timing: dout is registered, so the sample selected in cycle t appears in
// cycle t+1. The inputs stay below 2^(DW-1) in magnitude, so negation never
// overflows.
module pbm_carrier_gen #(
  parameter int unsigned DW = pbm_pkg::DATA_W
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic signed [DW-1:0] i_in,   // I pulse shaped
  input  logic signed [DW-1:0] q_in,   // Q pulse shaped
  output logic signed [DW-1:0] dout,   // modulated IF output
  output logic [1:0]           cphase  // carrier phase of the sample in dout
);

  logic [1:0]           cnt;
  logic signed [DW-1:0] sel;

  always_comb begin
    unique case (cnt)
      2'd0: sel = i_in;
      2'd1: sel = q_in;
      2'd2: sel = -i_in;   // two's complement
      2'd3: sel = -q_in;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt    <= '0;
      dout   <= '0;
      cphase <= '0;
    end else begin
      cnt    <= cnt + 2'd1;
      dout   <= sel;
      cphase <= cnt;
    end
  end

endmodule
