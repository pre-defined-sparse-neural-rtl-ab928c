// bp_unit: backpropagation edge processing of one junction,
// delta_{i-1}(k) = a-dot_{i-1}(k) * sum over the edges of k of W * delta_i.
//
// Every edge cycle, Z multipliers form W*delta_i for the Z edges; lane l uses
// the delta of the right neuron its edge belongs to (segment l / SEG). The
// products are accumulated per left neuron in the write bank of the left
// delta pair, which the lanes access in the same interleaved order as the left
// activations: each left neuron gets one edge per sweep, so in sweep 0 the
// product is written, in later sweeps it is added to the stored partial sum,
// and in the last sweep the sum is gated by the stored ReLU derivative bit.
// The partial sums are saturated to the word width whenever they are stored.
//
// Timing: combinational; the junction writes wdata at the end of the cycle in
// which the partial sums read in the previous cycle arrive.
module bp_unit
  import spnn_pkg::*;
#(
  parameter int Z   = 4,
  parameter int DIN = 2,
  localparam int NPC = imax(1, Z / DIN),
  localparam int SEG = imin(Z, DIN)
) (
  input  logic         first_sweep,
  input  logic         last_sweep,
  input  data_t        w    [Z],
  input  data_t        dr   [NPC],
  input  data_t        part [Z],
  input  logic [Z-1:0] ad,
  output data_t        wdata [Z]
);
  always_comb begin
    for (int l = 0; l < Z; l++) begin
      data_t s;
      acc_t  p;
      p = mulq(w[l], dr[l / SEG]);
      s = first_sweep ? sat(p) : sat(acc_t'(part[l]) + p);
      wdata[l] = (last_sweep && !ad[l]) ? '0 : s;
    end
  end
endmodule
