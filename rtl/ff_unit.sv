// ff_unit: feedforward edge processing of one junction (h = sum W*a + b,
// a = act(h), a-dot = act'(h)).
//
// Z multipliers form the products W*a of the Z edges of the current edge
// cycle. Because edges are numbered by right neuron, the products split into
// consecutive segments of SEG = min(Z, DIN) lanes, each belonging to one right
// neuron. Two cases are supported, as recommended for hardware:
//   Z >= DIN (Z a multiple of DIN): NPC = Z/DIN neurons finish every cycle;
//   Z <  DIN (DIN a multiple of Z): one neuron takes CPN = DIN/Z cycles and
//                                   its partial sum is kept in an accumulator.
// When a neuron finishes (`ndone`), the bias is added and the sum saturated.
// Hidden layers use ReLU, so a-dot is a single bit (h > 0). In the last
// junction (LAST=1) the output is linear and the unit also forms the cost
// derivative delta_L = a_L - y, which is the gradient of the squared error for
// a linear output. ReLU, the linear output and the squared-error cost are
// this design's choices; the architecture does not fix the activation.
// In a hidden junction (LAST=0) o_delta has no meaning and is held at 0.
//
// Timing: combinational from the memory read data to the o_* outputs, which
// the junction writes at the end of the same cycle. The accumulator updates on
// every valid cycle and clears when a neuron finishes.
module ff_unit
  import spnn_pkg::*;
#(
  parameter int Z    = 4,
  parameter int DIN  = 2,
  parameter bit LAST = 1'b0,
  localparam int NPC = imax(1, Z / DIN),
  localparam int SEG = imin(Z, DIN)
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         valid,
  input  logic         ndone,
  input  data_t        w [Z],
  input  data_t        a [Z],
  input  data_t        bias [NPC],
  input  data_t        y [NPC],
  output logic         o_we,
  output data_t        o_a [NPC],
  output logic [NPC-1:0] o_ad,
  output data_t        o_delta [NPC]
);
  acc_t seg_sum [NPC];
  acc_t acc     [NPC];
  acc_t psum    [NPC];
  data_t h      [NPC];

  always_comb begin
    for (int s = 0; s < NPC; s++) begin
      seg_sum[s] = '0;
      for (int k = 0; k < SEG; k++) seg_sum[s] += mulq(w[s*SEG+k], a[s*SEG+k]);
      psum[s] = acc[s] + seg_sum[s];
      h[s]    = sat(psum[s] + acc_t'(bias[s]));
      if (LAST) begin
        o_a[s]     = h[s];
        o_ad[s]    = 1'b1;
        o_delta[s] = sat(acc_t'(h[s]) - acc_t'(y[s]));
      end else begin
        o_a[s]     = (h[s] > 0) ? h[s] : '0;
        o_ad[s]    = (h[s] > 0);
        o_delta[s] = '0;
      end
    end
    o_we = valid && ndone;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < NPC; s++) acc[s] <= '0;
    end else if (valid) begin
      for (int s = 0; s < NPC; s++) acc[s] <= ndone ? '0 : psum[s];
    end
  end

  initial assert ((Z % DIN == 0) || (DIN % Z == 0))
    else $fatal(1, "ff_unit: Z and DIN must divide one another");
endmodule
