// spnn_top: training accelerator for a two-junction multilayer perceptron with
// structured pre-defined sparsity (network N0-N1-N2; every left neuron of
// junction i has DOUT_i edges, every right neuron DIN_i = N_{i-1}DOUT_i/N_i).
//
// Organisation (left to right):
//   a0 queue (5 banks x Z1 memories)  -> junction 1 (FF, UP)
//   a1 queue, a-dot1 queue (3 banks x Z2 memories)
//   delta1 pair (2 banks x Z2 memories) <- BP of junction 2, -> UP of junction 1
//   junction 2 (FF with cost derivative, BP, UP)
//   delta2 pair (2 banks x ZO memories) <- FF of junction 2, -> BP/UP of junction 2
// Junction i processes Z_i edges per cycle; Z1/Z2 are chosen so that both
// junctions take the same C = N0*DOUT1/Z1 = N1*DOUT2/Z2 edge cycles. The
// junction cycle is C + FLUSH clock cycles, and all junctions work on
// different inputs at the same time (junction pipelining) while each junction
// runs FF, BP and UP concurrently on different inputs (operational
// parallelism). One input is accepted per junction cycle; its output appears
// two junction cycles later, and its weight updates finish four junction
// cycles after it was loaded.
//
// Input protocol: in the first cycle of a junction cycle (jc_first = 1) the
// host raises x_valid and presents the label vector y_label and the first
// IN_LANES features; it keeps x_valid high and presents IN_LANES further
// features per cycle, in neuron order, until all N0 are in. A junction cycle
// whose first cycle has x_valid low carries no input (a pipeline bubble).
// Output: out_we pulses with out_idx and out_a when an output neuron is
// finished. train = 0 runs inference only (BP and UP idle).
// Host port: weights (per junction, lane, row) and biases can be written and
// read while busy = 0; weight reads return cfg_rdata one cycle later.
// Seeds phi1, phi2 define the clash-free connection pattern of each junction.
module spnn_top
  import spnn_pkg::*;
#(
  parameter int N0    = 800,
  parameter int N1    = 100,
  parameter int N2    = 10,
  parameter int DOUT1 = 20,
  parameter int DOUT2 = 10,
  parameter int Z1    = 160,
  parameter int Z2    = 10,
  parameter int ZO    = 1,
  parameter int FLUSH = 2,
  localparam int C        = N0 * DOUT1 / Z1,
  localparam int D1       = N0 / Z1,
  localparam int D2       = N1 / Z2,
  localparam int DO       = cdiv(N2, ZO),
  localparam int DIN2     = N1 * DOUT2 / N2,
  localparam int NPC2     = imax(1, Z2 / DIN2),
  localparam int NPC1     = imax(1, Z1 / (N0 * DOUT1 / N1)),
  localparam int IN_LANES = cdiv(N0, C),
  localparam int A1W      = (D1 > 1) ? $clog2(D1) : 1,
  localparam int A2W      = (D2 > 1) ? $clog2(D2) : 1,
  localparam int AOW      = (DO > 1) ? $clog2(DO) : 1,
  localparam int N2W      = (N2 > 1) ? $clog2(N2) : 1
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           train,
  input  logic [A1W-1:0] phi1 [Z1],
  input  logic [A2W-1:0] phi2 [Z2],
  output logic           jc_first,
  output logic           busy,
  input  logic           x_valid,
  input  data_t          x_data [IN_LANES],
  input  data_t          y_label [N2],
  output logic           out_we,
  output logic [N2W-1:0] out_idx,
  output data_t          out_a [NPC2],
  input  logic           cfg_junc,      // 0: junction 1, 1: junction 2
  input  logic           cfg_w_we,
  input  logic           cfg_w_re,
  input  logic [15:0]    cfg_lane,
  input  logic [15:0]    cfg_addr,
  input  data_t          cfg_wdata,
  input  logic           cfg_b_we,
  input  logic [15:0]    cfg_bidx,
  output data_t          cfg_rdata,
  output data_t          cfg_bdata
);
  localparam int L = 2;

  // ---------------- control ----------------
  logic [$clog2(C+FLUSH)-1:0] cyc;
  logic         first, last, loading;
  logic [L-1:0] ff_en, bpup_en;

  pipeline_ctrl #(.L(L), .C(C), .FLUSH(FLUSH)) u_ctrl (
    .clk(clk), .rst_n(rst_n), .in_valid(x_valid), .train(train),
    .cyc(cyc), .first(first), .last(last), .loading(loading),
    .ff_en(ff_en), .bpup_en(bpup_en), .busy(busy)
  );
  assign jc_first = first;

  // ---------------- input loader and label queue ----------------
  logic [Z1-1:0]  a0_we;
  logic [A1W-1:0] a0_waddr [Z1];
  data_t          a0_wdata [Z1];
  logic [15:0]    lcnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)         lcnt <= '0;
    else if (last)      lcnt <= '0;
    else if (x_valid && loading) lcnt <= lcnt + 16'd1;
  end

  always_comb begin
    a0_we = '0;
    for (int k = 0; k < Z1; k++) begin
      a0_waddr[k] = '0;
      a0_wdata[k] = '0;
    end
    for (int l = 0; l < IN_LANES; l++) begin
      automatic int j;
      j = (first ? 0 : int'(lcnt)) * IN_LANES + l;
      if (x_valid && loading && j < N0) begin
        a0_we[j % Z1]    = 1'b1;
        a0_waddr[j % Z1] = A1W'(j / Z1);
        a0_wdata[j % Z1] = x_data[l];
      end
    end
  end

  // Labels of the inputs in flight: written when loaded, read L junction
  // cycles later by the FF of the last junction (slot wp+1 of L+1).
  data_t ylab [L+1][N2];
  logic [1:0] ywp, yrp;
  always_comb yrp = (ywp == 2'(L)) ? '0 : ywp + 2'd1;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ywp <= '0;
      for (int s = 0; s <= L; s++)
        for (int j = 0; j < N2; j++) ylab[s][j] <= '0;
    end else begin
      if (first && x_valid) ylab[ywp] <= y_label;
      if (last) ywp <= (ywp == 2'(L)) ? '0 : ywp + 2'd1;
    end
  end

  // ---------------- layer 0 queue ----------------
  logic           j1_la_re, j1_lb_re;
  logic [A1W-1:0] j1_laddr [Z1];
  data_t          j1_la_data [Z1], j1_lb_data [Z1];

  layer_queue #(.NB(2*L+1), .Z(Z1), .D(D1), .T(data_t)) u_a0q (
    .clk(clk), .rst_n(rst_n), .rotate(last),
    .we(a0_we), .waddr(a0_waddr), .wdata(a0_wdata),
    .ra_en(j1_la_re), .ra_addr(j1_laddr), .ra_data(j1_la_data),
    .rb_en(j1_lb_re), .rb_addr(j1_laddr), .rb_data(j1_lb_data)
  );

  // ---------------- junction 1 ----------------
  logic [Z2-1:0]  j1_rw_we, j1_rw_ad;
  logic [A2W-1:0] j1_rw_waddr [Z2];
  data_t          j1_rw_a [Z2], j1_rw_delta [Z2];
  logic [Z2-1:0]  d1_rb_re;
  logic [A2W-1:0] d1_rb_raddr [Z2];
  data_t          d1_rb_rdata [Z2];
  data_t          j1_cfg_rdata, j1_cfg_bdata;
  data_t          j1_out_a [NPC1];
  logic           j1_out_we;
  logic [$clog2(N1)-1:0] j1_out_idx;
  logic           j1_lad_re;
  logic [Z1-1:0]  j1_ld_re, j1_ld_we;
  logic [A1W-1:0] j1_ld_waddr [Z1];
  data_t          j1_ld_wdata [Z1];
  data_t          zero_z1 [Z1];
  data_t          zero_y1 [N1];

  always_comb begin
    for (int k = 0; k < Z1; k++) zero_z1[k] = '0;
    for (int j = 0; j < N1; j++) zero_y1[j] = '0;
  end

  junction #(.NL(N0), .NR(N1), .DOUT(DOUT1), .Z(Z1), .ZR(Z2), .HAS_BP(1'b0), .LAST(1'b0)) u_j1 (
    .clk(clk), .rst_n(rst_n), .first(first),
    .ff_en(ff_en[0]), .bp_en(1'b0), .up_en(bpup_en[0]), .phi(phi1),
    .la_re(j1_la_re), .lb_re(j1_lb_re), .laddr(j1_laddr),
    .la_data(j1_la_data), .lb_data(j1_lb_data),
    .lad_re(j1_lad_re), .lad_data('0),
    .ld_re(j1_ld_re), .ld_rdata(zero_z1), .ld_we(j1_ld_we), .ld_waddr(j1_ld_waddr), .ld_wdata(j1_ld_wdata),
    .rd_re(d1_rb_re), .rd_raddr(d1_rb_raddr), .rd_rdata(d1_rb_rdata),
    .rw_we(j1_rw_we), .rw_waddr(j1_rw_waddr), .rw_a(j1_rw_a), .rw_ad(j1_rw_ad), .rw_delta(j1_rw_delta),
    .y(zero_y1), .out_we(j1_out_we), .out_idx(j1_out_idx), .out_a(j1_out_a),
    .cfg_w_we(cfg_w_we && !cfg_junc), .cfg_w_re(cfg_w_re && !cfg_junc),
    .cfg_lane(cfg_lane[$clog2(Z1)-1:0]), .cfg_addr(cfg_addr[$clog2(C)-1:0]), .cfg_wdata(cfg_wdata),
    .cfg_b_we(cfg_b_we && !cfg_junc), .cfg_bidx(cfg_bidx[$clog2(N1)-1:0]),
    .cfg_rdata(j1_cfg_rdata), .cfg_bdata(j1_cfg_bdata)
  );

  // ---------------- layer 1 queues ----------------
  logic           j2_la_re, j2_lb_re, j2_lad_re;
  logic [A2W-1:0] j2_laddr [Z2];
  data_t          j2_la_data [Z2], j2_lb_data [Z2];
  logic [0:0]     ad1_wdata [Z2];
  logic [0:0]     ad1_rdata [Z2], ad1_ra_unused [Z2];
  logic [Z2-1:0]  j2_lad_data;

  always_comb begin
    for (int k = 0; k < Z2; k++) begin
      ad1_wdata[k]   = j1_rw_ad[k];
      j2_lad_data[k] = ad1_rdata[k][0];
    end
  end

  layer_queue #(.NB(2*(L-1)+1), .Z(Z2), .D(D2), .T(data_t)) u_a1q (
    .clk(clk), .rst_n(rst_n), .rotate(last),
    .we(j1_rw_we), .waddr(j1_rw_waddr), .wdata(j1_rw_a),
    .ra_en(j2_la_re), .ra_addr(j2_laddr), .ra_data(j2_la_data),
    .rb_en(j2_lb_re), .rb_addr(j2_laddr), .rb_data(j2_lb_data)
  );

  layer_queue #(.NB(2*(L-1)+1), .Z(Z2), .D(D2), .T(logic [0:0])) u_ad1q (
    .clk(clk), .rst_n(rst_n), .rotate(last),
    .we(j1_rw_we), .waddr(j1_rw_waddr), .wdata(ad1_wdata),
    .ra_en(1'b0), .ra_addr(j2_laddr), .ra_data(ad1_ra_unused),
    .rb_en(j2_lad_re), .rb_addr(j2_laddr), .rb_data(ad1_rdata)
  );

  // ---------------- delta 1 pair ----------------
  logic [Z2-1:0]  j2_ld_re, j2_ld_we;
  logic [A2W-1:0] j2_ld_waddr [Z2];
  data_t          j2_ld_wdata [Z2], j2_ld_rdata [Z2];

  delta_pair #(.Z(Z2), .D(D2)) u_d1p (
    .clk(clk), .rst_n(rst_n), .swap(last),
    .wb_re(j2_ld_re), .wb_raddr(j2_laddr), .wb_rdata(j2_ld_rdata),
    .wb_we(j2_ld_we), .wb_waddr(j2_ld_waddr), .wb_wdata(j2_ld_wdata),
    .rb_re(d1_rb_re), .rb_raddr(d1_rb_raddr), .rb_rdata(d1_rb_rdata)
  );

  // ---------------- junction 2 ----------------
  logic [ZO-1:0]  j2_rw_we, j2_rw_ad;
  logic [AOW-1:0] j2_rw_waddr [ZO];
  data_t          j2_rw_a [ZO], j2_rw_delta [ZO];
  logic [ZO-1:0]  d2_rb_re;
  logic [AOW-1:0] d2_rb_raddr [ZO];
  data_t          d2_rb_rdata [ZO];
  data_t          j2_cfg_rdata, j2_cfg_bdata;
  logic [N2W-1:0] j2_out_idx;

  junction #(.NL(N1), .NR(N2), .DOUT(DOUT2), .Z(Z2), .ZR(ZO), .HAS_BP(1'b1), .LAST(1'b1)) u_j2 (
    .clk(clk), .rst_n(rst_n), .first(first),
    .ff_en(ff_en[1]), .bp_en(bpup_en[1]), .up_en(bpup_en[1]), .phi(phi2),
    .la_re(j2_la_re), .lb_re(j2_lb_re), .laddr(j2_laddr),
    .la_data(j2_la_data), .lb_data(j2_lb_data),
    .lad_re(j2_lad_re), .lad_data(j2_lad_data),
    .ld_re(j2_ld_re), .ld_rdata(j2_ld_rdata), .ld_we(j2_ld_we), .ld_waddr(j2_ld_waddr), .ld_wdata(j2_ld_wdata),
    .rd_re(d2_rb_re), .rd_raddr(d2_rb_raddr), .rd_rdata(d2_rb_rdata),
    .rw_we(j2_rw_we), .rw_waddr(j2_rw_waddr), .rw_a(j2_rw_a), .rw_ad(j2_rw_ad), .rw_delta(j2_rw_delta),
    .y(ylab[yrp]), .out_we(out_we), .out_idx(j2_out_idx), .out_a(out_a),
    .cfg_w_we(cfg_w_we && cfg_junc), .cfg_w_re(cfg_w_re && cfg_junc),
    .cfg_lane(cfg_lane[$clog2(Z2)-1:0]), .cfg_addr(cfg_addr[$clog2(C)-1:0]), .cfg_wdata(cfg_wdata),
    .cfg_b_we(cfg_b_we && cfg_junc), .cfg_bidx(cfg_bidx[N2W-1:0]),
    .cfg_rdata(j2_cfg_rdata), .cfg_bdata(j2_cfg_bdata)
  );
  assign out_idx = j2_out_idx;

  // ---------------- delta 2 (delta_L) pair ----------------
  logic [ZO-1:0]  d2_wb_re;
  logic [AOW-1:0] d2_wb_raddr [ZO];
  data_t          d2_wb_rdata [ZO];
  always_comb begin
    d2_wb_re = '0;
    for (int m = 0; m < ZO; m++) d2_wb_raddr[m] = '0;
  end

  delta_pair #(.Z(ZO), .D(DO)) u_d2p (
    .clk(clk), .rst_n(rst_n), .swap(last),
    .wb_re(d2_wb_re), .wb_raddr(d2_wb_raddr), .wb_rdata(d2_wb_rdata),
    .wb_we(j2_rw_we), .wb_waddr(j2_rw_waddr), .wb_wdata(j2_rw_delta),
    .rb_re(d2_rb_re), .rb_raddr(d2_rb_raddr), .rb_rdata(d2_rb_rdata)
  );

  // ---------------- host read mux ----------------
  logic cfg_junc_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)        cfg_junc_q <= 1'b0;
    else if (cfg_w_re) cfg_junc_q <= cfg_junc;
  end
  assign cfg_rdata = cfg_junc_q ? j2_cfg_rdata : j1_cfg_rdata;
  assign cfg_bdata = cfg_junc   ? j2_cfg_bdata : j1_cfg_bdata;

  initial begin
    assert (N1 * DOUT2 / Z2 == C) else $fatal(1, "spnn_top: junctions must have equal C");
    assert (IN_LANES <= Z1) else $fatal(1, "spnn_top: input lanes must not exceed Z1");
  end
endmodule
