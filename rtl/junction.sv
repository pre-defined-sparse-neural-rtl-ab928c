// junction: one junction of the network (the edges between layer i-1 and
// layer i) with its three concurrent operations, FF, BP and UP.
//
// Z edges are processed per cycle, so one operation on one input takes
// C = |W|/Z edge cycles (|W| = NL*DOUT = NR*DIN). Edges are numbered in order
// of their right neuron; edge cycle c handles edges c*Z .. c*Z+Z-1. In that
// cycle the junction
//   - reads weight row c once (natural order) and shares it with FF, BP, UP;
//   - reads the left activations of its Z lanes in interleaved order, lane k
//     at address (phi[k] + c) mod D of left memory k (cf_addr_gen), from two
//     different banks of the left queue: the FF input and the older UP input;
//   - reads the deltas of its right neurons (natural order) from the read bank
//     of the right delta pair, for BP and UP;
//   - for BP, reads the partial sums and (in the last sweep) the activation
//     derivatives of its left lanes' neurons at the interleaved addresses.
// One cycle later the data arrive and FF, BP and UP results are written:
// finished right activations (or, in the last junction, the output and the
// cost derivative) in natural order, left partial deltas at the interleaved
// addresses, and the updated weight row and biases. All FF, BP and UP work of a
// junction cycle is therefore done by edge cycle C, and the junction cycle is
// C + FLUSH cycles long with FLUSH >= 1.
//
// The enables ff_en, bp_en and up_en come from the pipeline controller and are
// constant over a junction cycle: each says whether an input is present at
// that stage of the pipeline. HAS_BP is 0 for the first junction, which has no
// left deltas to compute. Biases are held in registers (NR words).
//
// Host port: single weights and biases can be written and read while the
// pipeline is empty. Weight reads return cfg_rdata one cycle after cfg_w_re.
//
// Shapes: the edge numbering, the one-read-per-row weight sharing, the
// interleaved left addressing and the bank roles follow the architecture.
// This datapath only handles Z a multiple of the in-degree or the in-degree
// a multiple of Z (the shapes the architecture recommends). The default
// sizes are its 12-neuron, out-degree-2, Z=4 worked example with a 12-neuron
// right layer (in-degree 2); the example's 8-neuron right layer (in-degree
// 3) would straddle lanes unevenly and is rejected at elaboration. When LAST
// is 0 the out_* outputs and the rw_delta values are unused and held at 0.
// The host port, register biases and the two-stage (issue, write) timing are
// this design's own choices.
module junction
  import spnn_pkg::*;
#(
  parameter int NL     = 12,    // N_{i-1}, left layer size
  parameter int NR     = 12,    // N_i, right layer size
  parameter int DOUT   = 2,     // out-degree of left neurons
  parameter int Z      = 4,     // degree of parallelism z_i
  parameter int ZR     = 2,     // memories per bank on the right (z_{i+1})
  parameter bit HAS_BP = 1'b1,
  parameter bit LAST   = 1'b0,
  localparam int NE   = NL * DOUT,
  localparam int C    = NE / Z,
  localparam int D    = NL / Z,
  localparam int DIN  = NE / NR,
  localparam int NPC  = imax(1, Z / DIN),
  localparam int CPN  = imax(1, DIN / Z),
  localparam int DR   = cdiv(NR, ZR),
  localparam int AW   = (D > 1)  ? $clog2(D)  : 1,
  localparam int CAW  = (C > 1)  ? $clog2(C)  : 1,
  localparam int RAW  = (DR > 1) ? $clog2(DR) : 1,
  localparam int ZW   = (Z > 1)  ? $clog2(Z)  : 1,
  localparam int NW   = (NR > 1) ? $clog2(NR) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          first,            // edge cycle 0 of a junction cycle
  input  logic          ff_en,
  input  logic          bp_en,
  input  logic          up_en,
  input  logic [AW-1:0] phi [Z],          // clash-free seed vector
  // left activations: port A (FF input), port B (UP input)
  output logic          la_re,
  output logic          lb_re,
  output logic [AW-1:0] laddr [Z],
  input  data_t         la_data [Z],
  input  data_t         lb_data [Z],
  // left activation derivatives (BP), bank of the UP input
  output logic          lad_re,
  input  logic [Z-1:0]  lad_data,
  // left delta write bank (BP)
  output logic [Z-1:0]  ld_re,
  input  data_t         ld_rdata [Z],
  output logic [Z-1:0]  ld_we,
  output logic [AW-1:0] ld_waddr [Z],
  output data_t         ld_wdata [Z],
  // right delta read bank (UP, BP)
  output logic [ZR-1:0]  rd_re,
  output logic [RAW-1:0] rd_raddr [ZR],
  input  data_t          rd_rdata [ZR],
  // right writes: a_i / a-dot_i queues, or delta_L pair when LAST
  output logic [ZR-1:0]  rw_we,
  output logic [RAW-1:0] rw_waddr [ZR],
  output data_t          rw_a [ZR],
  output logic [ZR-1:0]  rw_ad,
  output data_t          rw_delta [ZR],
  // network output (LAST) and labels
  input  data_t          y [NR],
  output logic           out_we,
  output logic [NW-1:0]  out_idx,
  output data_t          out_a [NPC],
  // host port
  input  logic           cfg_w_we,
  input  logic           cfg_w_re,
  input  logic [ZW-1:0]  cfg_lane,
  input  logic [CAW-1:0] cfg_addr,
  input  data_t          cfg_wdata,
  input  logic           cfg_b_we,
  input  logic [NW-1:0]  cfg_bidx,
  output data_t          cfg_rdata,
  output data_t          cfg_bdata
);
  // ---------------- edge-cycle control ----------------
  logic           busy, active;
  logic [CAW-1:0] ec, c0;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0;
      ec   <= '0;
    end else if (active) begin
      busy <= (int'(c0) != C-1);
      ec   <= (int'(c0) == C-1) ? '0 : c0 + CAW'(1);
    end
  end

  assign active = first || busy;
  assign c0     = first ? '0 : ec;

  function automatic int nbase_of(int c);
    return (CPN > 1) ? c / CPN : c * NPC;
  endfunction

  logic first_sweep0, last_sweep0, ndone0;
  int   nb0;
  always_comb begin
    first_sweep0 = int'(c0) < D;
    last_sweep0  = int'(c0) >= C - D;
    ndone0       = (CPN > 1) ? ((int'(c0) % CPN) == CPN-1) : 1'b1;
    nb0          = nbase_of(int'(c0));
  end

  // ---------------- stage 0: issue reads ----------------
  cf_addr_gen #(.Z(Z), .D(D)) u_agen (
    .clk(clk), .rst_n(rst_n), .first(first), .active(active), .phi(phi), .addr(laddr)
  );

  logic           w_re;
  logic [CAW-1:0] w_raddr;
  data_t          w_rdata [Z];
  logic [Z-1:0]   w_we;
  logic [CAW-1:0] w_waddr;
  data_t          w_wdata [Z];

  logic run;   // an operation of this junction is using the weight bank
  assign run     = active && (ff_en || bp_en || up_en);
  assign w_re    = run || cfg_w_re;
  assign w_raddr = run ? c0 : cfg_addr;

  weight_bank #(.Z(Z), .C(C)) u_wbank (
    .clk(clk), .re(w_re), .raddr(w_raddr), .rdata(w_rdata),
    .we(w_we), .waddr(w_waddr), .wdata(w_wdata)
  );

  assign la_re  = active && ff_en;
  assign lb_re  = active && up_en;
  assign lad_re = active && bp_en && HAS_BP && last_sweep0;
  assign ld_re  = {Z{active && bp_en && HAS_BP && !first_sweep0}};

  always_comb begin
    rd_re = '0;
    for (int m = 0; m < ZR; m++) rd_raddr[m] = '0;
    for (int s = 0; s < NPC; s++) begin
      automatic int j;
      j = nb0 + s;
      if (j < NR) begin
        rd_re[j % ZR]    = active && (up_en || (bp_en && HAS_BP));
        rd_raddr[j % ZR] = RAW'(j / ZR);
      end
    end
  end

  // ---------------- stage 1: compute and write ----------------
  logic           ff1, bp1, up1, fs1, ls1, nd1;
  logic [CAW-1:0] c1;
  logic [AW-1:0]  laddr1 [Z];
  logic [NW:0]    nb1;
  logic [ZW-1:0]  lane_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ff1 <= 1'b0; bp1 <= 1'b0; up1 <= 1'b0;
      fs1 <= 1'b0; ls1 <= 1'b0; nd1 <= 1'b0; c1 <= '0;
      lane_q <= '0;
      for (int k = 0; k < Z; k++) laddr1[k] <= '0;
    end else begin
      ff1 <= active && ff_en;
      bp1 <= active && bp_en && HAS_BP;
      up1 <= active && up_en;
      fs1 <= first_sweep0;
      ls1 <= last_sweep0;
      nd1 <= ndone0;
      c1  <= c0;
      laddr1 <= laddr;
      if (cfg_w_re) lane_q <= cfg_lane;
    end
  end

  // first right neuron of the stage-1 cycle, recomputed from its cycle index
  assign nb1 = (NW+1)'(nbase_of(int'(c1)));

  // right-neuron operands of this cycle
  data_t bias_r [NR];
  data_t bias_s [NPC];
  data_t y_s    [NPC];
  data_t dr_s   [NPC];
  always_comb begin
    for (int s = 0; s < NPC; s++) begin
      automatic int j;
      j = (int'(nb1) + s < NR) ? int'(nb1) + s : NR - 1;
      bias_s[s] = bias_r[j];
      y_s[s]    = y[j];
      dr_s[s]   = rd_rdata[j % ZR];
    end
  end

  // FF
  logic             ff_we;
  data_t            ff_a  [NPC];
  logic [NPC-1:0]   ff_ad;
  data_t            ff_d  [NPC];

  ff_unit #(.Z(Z), .DIN(DIN), .LAST(LAST)) u_ff (
    .clk(clk), .rst_n(rst_n), .valid(ff1), .ndone(nd1),
    .w(w_rdata), .a(la_data), .bias(bias_s), .y(y_s),
    .o_we(ff_we), .o_a(ff_a), .o_ad(ff_ad), .o_delta(ff_d)
  );

  always_comb begin
    rw_we = '0;
    rw_ad = '0;
    for (int m = 0; m < ZR; m++) begin
      rw_waddr[m] = '0;
      rw_a[m]     = '0;
      rw_delta[m] = '0;
    end
    for (int s = 0; s < NPC; s++) begin
      automatic int j;
      j = int'(nb1) + s;
      if (j < NR) begin
        rw_we[j % ZR]    = ff_we;
        rw_waddr[j % ZR] = RAW'(j / ZR);
        rw_a[j % ZR]     = ff_a[s];
        rw_ad[j % ZR]    = ff_ad[s];
        rw_delta[j % ZR] = ff_d[s];
      end
    end
    out_we  = ff_we && LAST;
    out_idx = NW'(nb1);
    out_a   = ff_a;
  end

  // BP
  data_t bp_w [Z];
  bp_unit #(.Z(Z), .DIN(DIN)) u_bp (
    .first_sweep(fs1), .last_sweep(ls1), .w(w_rdata), .dr(dr_s),
    .part(ld_rdata), .ad(lad_data), .wdata(bp_w)
  );
  assign ld_we    = {Z{bp1}};
  assign ld_waddr = laddr1;
  assign ld_wdata = bp_w;

  // UP
  data_t up_w [Z];
  data_t up_b [NPC];
  up_unit #(.Z(Z), .DIN(DIN)) u_up (
    .w(w_rdata), .al(lb_data), .dr(dr_s), .bias(bias_s), .w_new(up_w), .b_new(up_b)
  );

  always_comb begin
    if (up1) begin
      w_we    = '1;
      w_waddr = c1;
      w_wdata = up_w;
    end else begin
      w_we    = Z'(cfg_w_we) << cfg_lane;
      w_waddr = cfg_addr;
      for (int k = 0; k < Z; k++) w_wdata[k] = cfg_wdata;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int j = 0; j < NR; j++) bias_r[j] <= '0;
    end else if (up1 && nd1) begin
      for (int s = 0; s < NPC; s++)
        if (int'(nb1) + s < NR) bias_r[int'(nb1) + s] <= up_b[s];
    end else if (cfg_b_we) begin
      bias_r[cfg_bidx] <= cfg_wdata;
    end
  end

  assign cfg_rdata = w_rdata[lane_q];
  assign cfg_bdata = bias_r[cfg_bidx];

  // ---------------- rules of the architecture ----------------
  initial begin
    assert (NE % Z == 0)  else $fatal(1, "junction: |W| must be a multiple of Z");
    assert (NL % Z == 0)  else $fatal(1, "junction: N_{i-1} must be a multiple of Z");
    assert (NE % NR == 0) else $fatal(1, "junction: in-degree must be an integer");
    assert (ZR >= NPC)    else $fatal(1, "junction: right bank needs ceil(Z/DIN) memories");
    assert (D >= 2 || !HAS_BP) else $fatal(1, "junction: BP needs left memories of depth 2 or more");
  end

  a_no_host_write_during_up: assert property (@(posedge clk) disable iff (!rst_n)
    !(cfg_w_we && up1)) else $error("junction: host weight write during UP");
  a_no_host_read_during_run: assert property (@(posedge clk) disable iff (!rst_n)
    !(cfg_w_re && run)) else $error("junction: host weight read during a junction cycle");
endmodule
