// up_unit: stochastic-gradient update of one junction,
// W <- W - eta * a_{i-1} * delta_i and b <- b - eta * delta_i.
//
// Z multipliers form a*delta for the Z edges of the current edge cycle (lane l
// uses the left activation it read in interleaved order and the delta of its
// right neuron, segment l / SEG). The product is scaled by the learning rate
// eta = 2^-ETA_SHIFT with a shift and subtracted from the weight read in the
// same cycle; the result is written back to the same row of the weight bank.
// When right neurons finish (`ndone`) their biases are updated too. An update
// happens for every input, i.e. the architecture trains with batch size one.
//
// Timing: combinational; the junction writes the results at the end of the
// cycle in which the weights and activations arrive.
module up_unit
  import spnn_pkg::*;
#(
  parameter int Z   = 4,
  parameter int DIN = 2,
  localparam int NPC = imax(1, Z / DIN),
  localparam int SEG = imin(Z, DIN)
) (
  input  data_t w     [Z],
  input  data_t al    [Z],
  input  data_t dr    [NPC],
  input  data_t bias  [NPC],
  output data_t w_new [Z],
  output data_t b_new [NPC]
);
  always_comb begin
    for (int l = 0; l < Z; l++)
      w_new[l] = sat(acc_t'(w[l]) - wstep(al[l], dr[l / SEG]));
    for (int s = 0; s < NPC; s++)
      b_new[s] = sat(acc_t'(bias[s]) - (acc_t'(dr[s]) >>> ETA_SHIFT));
  end
endmodule
