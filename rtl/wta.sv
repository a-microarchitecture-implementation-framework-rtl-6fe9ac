// wta: 1-winner-take-all lateral inhibition for a column of Q neurons.
//
// The first neuron to spike in a gamma cycle wins and its output pulse passes
// through intact; every other neuron's output is blocked until the next gamma
// cycle. If several neurons spike first in the same unit cycle, the one with
// the lowest index wins.
//
// Working: the OR of all spike inputs is the temporal "min" (the first spike).
// A latch (flip-flop here) records that the first spike has happened and which
// neuron won; in the cycle of the first spike the winner is chosen by a
// lowest-index priority among the neurons spiking in that cycle. Afterwards
// only the recorded winner's pulse can pass. The latches clear at the closing
// edge of the gamma_end cycle.
//
// Timing: z_out is combinational from z_in (zero latency).
//
// Follows the paper: first-spike selection, blocking until the next gamma
// cycle, lowest-index tie break. This design's choice: the winner is stored as
// a one-hot register instead of one temporal comparator per neuron.
module wta #(
  parameter int unsigned Q = 4
) (
  input  logic         clk,
  input  logic         rst,
  input  logic         gamma_end,
  input  logic [Q-1:0] z_in,   // neuron output pulses
  output logic [Q-1:0] z_out   // inhibited output pulses
);

  logic         seen_q;       // first spike has happened this gamma cycle
  logic [Q-1:0] win_q;        // one-hot winner
  logic [Q-1:0] first;        // lowest-index spiking neuron this cycle

  always_comb begin
    first = '0;
    for (int j = Q - 1; j >= 0; j--)
      if (z_in[j]) first = Q'(1) << j;
  end

  assign z_out = z_in & (seen_q ? win_q : first);

  always_ff @(posedge clk) begin
    if (rst || gamma_end) begin
      seen_q <= 1'b0;
      win_q  <= '0;
    end else if (!seen_q && |z_in) begin
      seen_q <= 1'b1;
      win_q  <= first;
    end
  end

  // At most one neuron's output passes in any cycle.
  a_onehot: assert property (@(posedge clk) disable iff (rst) $onehot0(z_out));

endmodule
