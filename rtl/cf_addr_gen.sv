// cf_addr_gen: type-1 clash-free address generator for the left memory banks
// of one junction.
//
// The left bank of a junction has Z memories (one per edge lane) of depth D.
// Lane k only ever reads memory k. In edge cycle 0 of a junction cycle lane k
// reads address phi[k] (the seed vector); in every following cycle its address
// is incremented modulo D. Lane k in cycle c therefore touches left neuron
// ((phi[k] + c) mod D) * Z + k, so each memory is read exactly once per cycle
// (clash-free) and every left neuron is visited once per sweep of D cycles.
// This is the scheme of the architecture: only phi is stored, and Z modulo-D
// incrementers generate all addresses.
//
// Timing: `first` marks edge cycle 0 and `active` every edge cycle
// (0..C-1). addr is combinational: phi when first, else the stored counters.
// The counters advance on each active cycle.
module cf_addr_gen #(
  parameter int Z = 4,
  parameter int D = 3,
  localparam int AW = (D > 1) ? $clog2(D) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          first,
  input  logic          active,
  input  logic [AW-1:0] phi  [Z],
  output logic [AW-1:0] addr [Z]
);
  logic [AW-1:0] cnt [Z];

  always_comb begin
    for (int k = 0; k < Z; k++) addr[k] = first ? phi[k] : cnt[k];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < Z; k++) cnt[k] <= '0;
    end else if (active) begin
      for (int k = 0; k < Z; k++)
        cnt[k] <= (int'(addr[k]) == D-1) ? '0 : addr[k] + AW'(1);
    end
  end

  // A seed entry outside 0..D-1 would address a cell that holds no neuron.
  for (genvar k = 0; k < Z; k++) begin : g_chk
    a_phi_in_range: assert property (@(posedge clk) disable iff (!rst_n)
      first |-> (int'(phi[k]) < D)) else $error("cf_addr_gen: phi[%0d] >= D", k);
  end
endmodule
