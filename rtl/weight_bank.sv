// weight_bank: the single weight memory bank of a junction.
//
// Z dual-port memories, one per edge lane, each C words deep (C = |W|/Z, the
// number of edge cycles in a junction cycle). Edges are numbered in order of
// their right neuron; edge e lives in memory e mod Z at address e / Z, so one
// row (the same address in every memory) holds the Z edges processed in one
// cycle: natural-order access. The bank is read once per edge cycle and the
// word read is shared by the FF, BP and UP units; the UP unit writes the
// updated row back through the second port one cycle later, so the three
// operations never clash on this bank. Per-lane write enables also let a host
// load single weights.
//
// Timing: rdata is valid the cycle after re. A read of the row being written
// in the same cycle returns the old row.
module weight_bank
  import spnn_pkg::*;
#(
  parameter int Z = 4,
  parameter int C = 6,
  localparam int AW = (C > 1) ? $clog2(C) : 1
) (
  input  logic          clk,
  input  logic          re,
  input  logic [AW-1:0] raddr,
  output data_t         rdata [Z],
  input  logic [Z-1:0]  we,
  input  logic [AW-1:0] waddr,
  input  data_t         wdata [Z]
);
  for (genvar k = 0; k < Z; k++) begin : g_mem
    dp_ram #(.W(DW), .D(C)) u_mem (
      .clk   (clk),
      .re    (re),
      .raddr (raddr),
      .rdata (rdata[k]),
      .we    (we[k]),
      .waddr (waddr),
      .wdata (wdata[k])
    );
  end
endmodule
