// pbm_data_generator: serial-to-parallel converter of the modulator (the "DG").
//
// The serial message stream is split into an even-bit (in-phase, I) stream and
// an odd-bit (quadrature, Q) stream, one bit pair per symbol. For OQPSK the
// Q stream is also offered delayed by one bit period, i.e. half a symbol.
// Both behaviours follow the paper; the timing below is this design's own.
//
// Timing. Everything runs on the sample clock clk, with one symbol every four
// cycles and one serial bit every two cycles. A free-running 2-bit counter
// drives the schedule:
//   cnt==1 : ser_in sampled as the even (I) bit        (bit_en high)
//   cnt==3 : ser_in sampled as the odd (Q) bit          (bit_en high)
//            and the pair {i_bit, q_bit} is registered; sym_stb is high in
//            the following cycle (cnt==0)
//   cnt==1 : q_bit copied into q_dly, two cycles (one bit period) later;
//            q_dly_stb is high in the following cycle (cnt==2)
// bit_en tells the data source when ser_in is taken, so the source changes
// ser_in after a cycle with bit_en high. Reset clears counter and outputs.
module pbm_data_generator (
  input  logic clk,
  input  logic rst_n,
  input  logic ser_in,     // serial message bits
  output logic bit_en,     // ser_in is sampled at the end of this cycle
  output logic i_bit,      // even bit of the current symbol
  output logic q_bit,      // odd bit of the current symbol
  output logic sym_stb,    // one-cycle pulse: new {i_bit, q_bit}
  output logic q_dly,      // q_bit delayed by one bit period (OQPSK)
  output logic q_dly_stb   // one-cycle pulse: new q_dly
);

  logic [1:0] cnt;
  logic       even_r;

  assign bit_en = cnt[0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt       <= '0;
      even_r    <= 1'b0;
      i_bit     <= 1'b0;
      q_bit     <= 1'b0;
      sym_stb   <= 1'b0;
      q_dly     <= 1'b0;
      q_dly_stb <= 1'b0;
    end else begin
      cnt       <= cnt + 2'd1;
      sym_stb   <= 1'b0;
      q_dly_stb <= 1'b0;
      case (cnt)
        2'd1: begin
          even_r    <= ser_in;
          q_dly     <= q_bit;
          q_dly_stb <= 1'b1;
        end
        2'd3: begin
          i_bit   <= even_r;
          q_bit   <= ser_in;
          sym_stb <= 1'b1;
        end
        default: ;
      endcase
    end
  end

endmodule
