// layer_queue: the queue of memory banks that holds one layer's activations
// a_i (or their derivatives a-dot_i) for several inputs in flight.
//
// With junction pipelining, layer i is written by the FF unit of junction i
// for input m, read by the FF unit of junction i+1 one junction cycle later,
// and read again by the UP (and BP) unit of junction i+1 for the same input
// 2(L-i)-1 junction cycles after that. The queue therefore holds NB = 2(L-i)+1
// banks, each with Z single-port memories of depth D (Z = z_{i+1}, the
// parallelism of the junction that reads the layer; neuron j sits in memory
// j mod Z at address j / Z). A write pointer wp advances at every junction
// cycle boundary (`rotate`); in any junction cycle
//   bank wp     is written (natural order, per-memory write ports),
//   bank wp-1   is read by port A (the next junction's FF, interleaved order),
//   bank wp+1   is read by port B (the next junction's UP/BP: oldest input),
// and the others only hold data. Each bank thus sees at most one access per
// memory per cycle, which is why single-port memories suffice.
//
// The word type T is a parameter (a data word for activations, one bit for
// ReLU derivatives).
//
// Timing: read data is valid the cycle after the read enable; the bank that
// returns data is the one selected when the read was issued.
module layer_queue #(
  parameter int NB = 3,
  parameter int Z  = 4,
  parameter int D  = 3,
  parameter type T = logic [15:0],
  localparam int AW = (D > 1) ? $clog2(D) : 1,
  localparam int BW = (NB > 1) ? $clog2(NB) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          rotate,
  // write port: bank wp
  input  logic [Z-1:0]  we,
  input  logic [AW-1:0] waddr [Z],
  input  T              wdata [Z],
  // read port A: bank wp-1
  input  logic          ra_en,
  input  logic [AW-1:0] ra_addr [Z],
  output T              ra_data [Z],
  // read port B: bank wp+1
  input  logic          rb_en,
  input  logic [AW-1:0] rb_addr [Z],
  output T              rb_data [Z]
);
  logic [BW-1:0] wp, bank_a, bank_b, bank_a_q, bank_b_q;
  T              rdata [NB][Z];

  always_comb begin
    bank_a = (wp == '0) ? BW'(NB-1) : wp - BW'(1);
    bank_b = (int'(wp) == NB-1) ? '0 : wp + BW'(1);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp       <= '0;
      bank_a_q <= '0;
      bank_b_q <= '0;
    end else begin
      if (rotate) wp <= (int'(wp) == NB-1) ? '0 : wp + BW'(1);
      if (ra_en) bank_a_q <= bank_a;
      if (rb_en) bank_b_q <= bank_b;
    end
  end

  for (genvar b = 0; b < NB; b++) begin : g_bank
    for (genvar k = 0; k < Z; k++) begin : g_mem
      logic          en, wr;
      logic [AW-1:0] addr;
      always_comb begin
        wr   = (wp == BW'(b)) && we[k];
        en   = wr || (ra_en && bank_a == BW'(b)) || (rb_en && bank_b == BW'(b));
        addr = (wp == BW'(b)) ? waddr[k] : (bank_a == BW'(b)) ? ra_addr[k] : rb_addr[k];
      end
      sp_ram #(.W($bits(T)), .D(D)) u_mem (
        .clk   (clk),
        .en    (en),
        .we    (wr),
        .addr  (addr),
        .wdata (wdata[k]),
        .rdata (rdata[b][k])
      );
    end
  end

  always_comb begin
    for (int k = 0; k < Z; k++) begin
      ra_data[k] = rdata[bank_a_q][k];
      rb_data[k] = rdata[bank_b_q][k];
    end
  end

  // The three roles must fall on three different banks.
  initial assert (NB >= 3) else $fatal(1, "layer_queue: NB must be at least 3");
endmodule
