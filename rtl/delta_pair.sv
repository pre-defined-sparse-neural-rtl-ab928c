// delta_pair: the pair of delta banks of one layer.
//
// Two banks, each with Z dual-port memories of depth D (neuron j in memory
// j mod Z at address j / Z). In every junction cycle one bank is the write
// bank and the other the read bank; `swap` exchanges them at the junction
// cycle boundary, so deltas produced in one junction cycle are consumed in the
// next. The write bank offers a per-memory read port and a per-memory write
// port, which lets the BP unit of the junction on the right accumulate partial
// sums read-modify-write in interleaved order. The read bank offers one
// per-memory read port, used by the UP and BP units of the junction on the
// left in natural order.
//
// Timing: read data is valid the cycle after the read enable.
module delta_pair
  import spnn_pkg::*;
#(
  parameter int Z = 4,
  parameter int D = 3,
  localparam int AW = (D > 1) ? $clog2(D) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          swap,
  // write bank: read port for read-modify-write
  input  logic [Z-1:0]  wb_re,
  input  logic [AW-1:0] wb_raddr [Z],
  output data_t         wb_rdata [Z],
  // write bank: write port
  input  logic [Z-1:0]  wb_we,
  input  logic [AW-1:0] wb_waddr [Z],
  input  data_t         wb_wdata [Z],
  // read bank
  input  logic [Z-1:0]  rb_re,
  input  logic [AW-1:0] rb_raddr [Z],
  output data_t         rb_rdata [Z]
);
  logic  wsel, wsel_q;       // index of the write bank
  data_t rdata [2][Z];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wsel   <= 1'b0;
      wsel_q <= 1'b0;
    end else begin
      if (swap) wsel <= ~wsel;
      wsel_q <= wsel;
    end
  end

  for (genvar b = 0; b < 2; b++) begin : g_bank
    for (genvar k = 0; k < Z; k++) begin : g_mem
      logic          is_w;
      logic          re, we;
      logic [AW-1:0] raddr;
      always_comb begin
        is_w  = (wsel == 1'(b));
        re    = is_w ? wb_re[k] : rb_re[k];
        raddr = is_w ? wb_raddr[k] : rb_raddr[k];
        we    = is_w && wb_we[k];
      end
      dp_ram #(.W(DW), .D(D)) u_mem (
        .clk   (clk),
        .re    (re),
        .raddr (raddr),
        .rdata (rdata[b][k]),
        .we    (we),
        .waddr (wb_waddr[k]),
        .wdata (wb_wdata[k])
      );
    end
  end

  always_comb begin
    for (int k = 0; k < Z; k++) begin
      wb_rdata[k] = rdata[wsel_q][k];
      rb_rdata[k] = rdata[~wsel_q][k];
    end
  end
endmodule
