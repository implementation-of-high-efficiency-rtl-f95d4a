// lif_neuron: single-time-step leaky integrate-and-fire activation for N neurons.
//
// With one time step the membrane starts at rest and is sampled once, so the
// LIF reduces to a comparison: spike = (U > U_th). No membrane potential is
// stored and no leak or reset logic is needed, which is the point of the
// single-time-step network. The threshold is a parameter at the integer scale
// of the accumulator (its value is this design's choice). Combinational.
module lif_neuron #(
  parameter int unsigned N      = 8,
  parameter int unsigned XW     = 16,
  parameter int          THRESH = 64
) (
  input  logic signed [N-1:0][XW-1:0] u,
  output logic        [N-1:0]         spk
);
  always_comb
    for (int n = 0; n < N; n++) spk[n] = ($signed(u[n]) > XW'(THRESH));
endmodule
