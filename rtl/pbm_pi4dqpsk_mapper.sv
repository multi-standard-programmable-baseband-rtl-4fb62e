// pbm_pi4dqpsk_mapper: pi/4 DQPSK symbol mapper.
//
// Each bit pair selects a phase step from the paper's table (00 -> pi/4,
// 01 -> 3pi/4, 10 -> 5pi/4, 11 -> 7pi/4). The phase calculator is an
// accumulator, theta(n) = theta(n-1) + dtheta(n), kept modulo 2pi in units of
// pi/4, and the IQ LUT turns theta(n) into amplitudes from
// {-1, -0.707, 0, 0.707, 1}. Consecutive symbols alternate between the axis
// points and the diagonal points.
//
// Interface and timing: sym is combinational and shows the symbol the current
// input pair produces, theta(n-1) + dtheta. On a cycle with en high the
// accumulator takes that new phase, so sym must be sampled in that same
// cycle. Reset sets theta to 0 (this design's choice).
module pbm_pi4dqpsk_mapper
  import pbm_pkg::*;
(
  input  logic    clk,
  input  logic    rst_n,
  input  logic    en,      // advance the accumulator (one pulse per symbol)
  input  logic    i_in,
  input  logic    q_in,
  output iq_sym_t sym
);

  logic [2:0] theta_q;     // theta(n-1)
  logic [2:0] dtheta;
  logic [2:0] theta_d;     // theta(n)

  always_comb begin
    dtheta  = {i_in, q_in, 1'b1};   // (2*{I,Q} + 1) * pi/4
    theta_d = theta_q + dtheta;     // modulo 8
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  theta_q <= '0;
    else if (en) theta_q <= theta_d;
  end

  pbm_iq_lut u_lut (.phase(theta_d), .sym(sym));

endmodule
