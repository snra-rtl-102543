// pbit_neuron: behavioural model (not synthesizable) of a probabilistic
// spin-logic bit, the neuron of the SNRA's RBMs.
//
// The physical p-bit is an SHE-driven MTJ whose free layer has a near-zero
// energy barrier, so thermal noise flips it continuously; the charge current
// through its spin Hall layer biases it, and its output voltage V_OUT is 1
// with probability sigmoid(I / I0). This model draws one uniform random
// threshold per clock edge and compares it with sigmoid(i_in / I0), so
// v_out is a fresh Bernoulli sample every cycle that follows i_in without
// delay inside a cycle. The sigmoid relation is the paper's; the per-clock
// sampling and the scale I0 (in weight units) are this model's choices.
module pbit_neuron #(
  parameter real I0 = 1.0
) (
  input  logic clk,
  input  int   i_in,
  output logic v_out
);

  real thr;

  always_ff @(posedge clk)
    thr <= real'($urandom) / 4294967296.0;

  always_comb
    v_out = (1.0 / (1.0 + $exp(-real'(i_in) / I0))) > thr;

endmodule
