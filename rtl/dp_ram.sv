// dp_ram: simple dual-port synchronous RAM (one read port, one write port), the
// storage element of the weight and delta banks. A read and a write may happen
// in the same cycle; a read of the address being written returns the old word.
// Read data appears the cycle after re and holds until the next read.
module dp_ram #(
  parameter int W = 16,
  parameter int D = 8,
  localparam int AW = (D > 1) ? $clog2(D) : 1
) (
  input  logic          clk,
  input  logic          re,
  input  logic [AW-1:0] raddr,
  output logic [W-1:0]  rdata,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [W-1:0]  wdata
);
  logic [W-1:0] mem [D];

  always_ff @(posedge clk) begin
    if (re) rdata <= mem[raddr];
    if (we) mem[waddr] <= wdata;
  end
endmodule
