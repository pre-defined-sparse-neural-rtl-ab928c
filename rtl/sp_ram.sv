// sp_ram: single-port synchronous RAM, the storage element of the activation
// queues. One access per cycle: a write when en && we, otherwise a read when en.
// Read data appears on rdata the cycle after the read and holds until the next
// read. Contents are not reset (a RAM macro is not); readers must write before
// they read.
module sp_ram #(
  parameter int W = 16,
  parameter int D = 8,
  localparam int AW = (D > 1) ? $clog2(D) : 1
) (
  input  logic          clk,
  input  logic          en,
  input  logic          we,
  input  logic [AW-1:0] addr,
  input  logic [W-1:0]  wdata,
  output logic [W-1:0]  rdata
);
  logic [W-1:0] mem [D];

  always_ff @(posedge clk) begin
    if (en) begin
      if (we) mem[addr] <= wdata;
      else    rdata     <= mem[addr];
    end
  end
endmodule
