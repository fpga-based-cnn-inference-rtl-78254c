// barrier: hardware form of the Pthreads barrier that synchronises the four
// data-staging units at the end of every OFM tile position (paper, Sec. III-B).
//
// Each participant pulses 'arrive' once when its share of the tile is done.
// 'release' goes high, combinationally, in the cycle the last participant
// arrives, and the arrival record is cleared for the next round.  Arrivals in
// the releasing cycle count for the round that is released.
module barrier #(
  parameter int N = 4
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [N-1:0] arrive,
  output logic         release_o
);
  logic [N-1:0] arrived_q;

  assign release_o = &(arrived_q | arrive);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)         arrived_q <= '0;
    else if (release_o) arrived_q <= '0;
    else                arrived_q <= arrived_q | arrive;
  end

  // a participant may not arrive twice in one round
  a_once: assert property (@(posedge clk) disable iff (!rst_n) (arrive & arrived_q) == '0);
endmodule
