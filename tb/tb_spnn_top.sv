// tb_spnn_top: end-to-end test of the accelerator at a reduced size.
//
// Network 12-8-2 with out-degrees (2,1) and parallelism (6,2): junction 1
// finishes two right neurons per edge cycle, junction 2 needs two edge cycles
// per output neuron, and the junction cycle is 4 + 2 clock cycles. Random
// weights, biases, seeds, inputs and labels are loaded; inputs are presented
// back to back, with bubbles, first in training mode and then inference only.
// Every output value and the clock cycle it appears in, and finally every
// weight and bias after training, are compared with an independent reference
// model of the pipelined schedule (spnn_tb_pkg). The test also requires that
// all FF/BP/UP operations ran concurrently, that bubbles and inference-only
// junction cycles occurred, and that the ReLU derivative zeroed a delta.
module tb_spnn_top;
  localparam int N0 = 12, N1 = 8, N2 = 2, DOUT1 = 2, DOUT2 = 1, Z1 = 6, Z2 = 2, ZO = 1, FLUSH = 2;
  localparam int NT = 40, NT_TRAIN = 30, MAXIN = 32, SEED = 7, WR = 120, WR2 = 120;
  localparam int WATCHDOG = 20000;

  import spnn_pkg::*;
  import spnn_tb_pkg::*;

  localparam int C        = N0 * DOUT1 / Z1;
  localparam int JC       = C + FLUSH;
  localparam int D1       = N0 / Z1;
  localparam int D2       = N1 / Z2;
  localparam int DIN2     = N1 * DOUT2 / N2;
  localparam int NPC2     = imax(1, Z2 / DIN2);
  localparam int CPN2     = imax(1, DIN2 / Z2);
  localparam int IN_LANES = cdiv(N0, C);
  localparam int NLC      = cdiv(N0, IN_LANES);
  localparam int A1W      = (D1 > 1) ? $clog2(D1) : 1;
  localparam int A2W      = (D2 > 1) ? $clog2(D2) : 1;
  localparam int N2W      = (N2 > 1) ? $clog2(N2) : 1;

  typedef spnn_model #(N0, N1, N2, DOUT1, DOUT2, Z1, Z2, MAXIN) model_t;

  logic           clk = 1'b0;
  logic           rst_n = 1'b0;
  logic           train;
  logic [A1W-1:0] phi1 [Z1];
  logic [A2W-1:0] phi2 [Z2];
  logic           jc_first, busy;
  logic           x_valid;
  data_t          x_data [IN_LANES];
  data_t          y_label [N2];
  logic           out_we;
  logic [N2W-1:0] out_idx;
  data_t          out_a [NPC2];
  logic           cfg_junc, cfg_w_we, cfg_w_re, cfg_b_we;
  logic [15:0]    cfg_lane, cfg_addr, cfg_bidx;
  data_t          cfg_wdata, cfg_rdata, cfg_bdata;

  always #5 clk = ~clk;

  spnn_top #(
    .N0(N0), .N1(N1), .N2(N2), .DOUT1(DOUT1), .DOUT2(DOUT2), .Z1(Z1), .Z2(Z2), .ZO(ZO), .FLUSH(FLUSH)
  ) u_dut (.*);

  model_t mdl;
  int     checks = 0, failures = 0;
  longint ncyc = 0;
  int     inp [];
  bit     trn [];
  data_t  got_val [$];
  int     got_idx [$];
  longint got_t [$];
  longint jc_start [$];
  data_t  w1_init [Z1][C];
  data_t  w2_init [Z2][C];
  int     n_moved = 0;
  int     n_overlap = 0, n_bubble = 0, n_infer = 0, n_gate = 0, n_sat = 0;

  // Output capture, junction-cycle start times and mechanism counters.
  always @(posedge clk) begin
    if (rst_n) begin
      if (jc_first) begin
        jc_start.push_back(ncyc);
        if (busy && !x_valid) n_bubble++;
        if (!train && u_dut.ff_en != '0) n_infer++;
      end
      if (u_dut.ff_en == '1 && u_dut.bpup_en == '1) n_overlap++;
      if (u_dut.u_j2.bp1 && u_dut.u_j2.ls1 && (u_dut.u_j2.lad_data != '1)) n_gate++;
      if (out_we)
        for (int s = 0; s < NPC2; s++) begin
          got_val.push_back(out_a[s]);
          got_idx.push_back(int'(out_idx) + s);
          got_t.push_back(ncyc);
          if (out_a[s] == 16'sh7fff || out_a[s] == -16'sh8000) n_sat++;
        end
    end
    ncyc <= ncyc + 1;
  end

  function automatic data_t rnd(int lo, int hi);
    return data_t'(lo + int'($urandom % (hi - lo + 1)));
  endfunction

  task automatic check(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures <= 20) $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    int nin, t, t0;
    void'($urandom(SEED));
    mdl = new();
    // schedule: inputs, bubbles, then inference-only junction cycles
    inp = new[NT];
    trn = new[NT];
    nin = 0;
    for (t = 0; t < NT; t++) begin
      trn[t] = (t < NT_TRAIN);
      inp[t] = -1;
      if (t < NT - 5 && !(t % 7 == 5) && nin < MAXIN) begin
        inp[t] = nin;
        nin++;
      end
    end
    // parameters and data
    for (int k = 0; k < Z1; k++) begin mdl.phi1[k] = int'($urandom % D1); phi1[k] = A1W'(mdl.phi1[k]); end
    for (int k = 0; k < Z2; k++) begin mdl.phi2[k] = int'($urandom % D2); phi2[k] = A2W'(mdl.phi2[k]); end
    for (int k = 0; k < Z1; k++) for (int c = 0; c < C; c++) mdl.w1[k][c] = rnd(-WR, WR);
    for (int k = 0; k < Z2; k++) for (int c = 0; c < C; c++) mdl.w2[k][c] = rnd(-WR2, WR2);
    for (int j = 0; j < N1; j++) mdl.b1[j] = rnd(-16, 16);
    for (int j = 0; j < N2; j++) mdl.b2[j] = rnd(-16, 16);
    for (int m = 0; m < MAXIN; m++) begin
      for (int j = 0; j < N0; j++) mdl.a0[m][j] = rnd(0, 255);
      for (int j = 0; j < N2; j++) mdl.lab[m][j] = rnd(0, 255);
    end
    // reset and host configuration
    train = 1'b0; x_valid = 1'b0; cfg_junc = 1'b0; cfg_w_we = 1'b0; cfg_w_re = 1'b0; cfg_b_we = 1'b0;
    cfg_lane = '0; cfg_addr = '0; cfg_bidx = '0; cfg_wdata = '0;
    for (int l = 0; l < IN_LANES; l++) x_data[l] = '0;
    for (int j = 0; j < N2; j++) y_label[j] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int jn = 0; jn < 2; jn++)
      for (int k = 0; k < (jn ? Z2 : Z1); k++)
        for (int c = 0; c < C; c++) begin
          @(negedge clk);
          cfg_junc = jn[0]; cfg_w_we = 1'b1; cfg_lane = 16'(k); cfg_addr = 16'(c);
          cfg_wdata = jn ? mdl.w2[k][c] : mdl.w1[k][c];
        end
    for (int jn = 0; jn < 2; jn++)
      for (int j = 0; j < (jn ? N2 : N1); j++) begin
        @(negedge clk);
        cfg_w_we = 1'b0; cfg_b_we = 1'b1; cfg_junc = jn[0]; cfg_bidx = 16'(j);
        cfg_wdata = jn ? mdl.b2[j] : mdl.b1[j];
      end
    @(negedge clk);
    cfg_b_we = 1'b0;
    // run NT junction cycles, driving each from its first cycle
    while (!jc_first) @(negedge clk);
    t0 = jc_start.size();
    for (t = 0; t < NT; t++) begin
      for (int c = 0; c < JC; c++) begin
        train   = trn[t];
        x_valid = (inp[t] >= 0) && (c < NLC);
        for (int l = 0; l < IN_LANES; l++)
          x_data[l] = (x_valid && c*IN_LANES + l < N0) ? mdl.a0[inp[t]][c*IN_LANES + l] : '0;
        if (c == 0 && inp[t] >= 0) y_label = mdl.lab[inp[t]];
        if (c == 0) check("junction cycle start", int'(jc_first), 1);
        @(negedge clk);
      end
    end
    x_valid = 1'b0;
    check("pipeline drained", int'(busy), 0);
    // reference model (keep the initial weights to see that training moved them)
    w1_init = mdl.w1;
    w2_init = mdl.w2;
    for (t = 0; t < NT; t++) mdl.step(t, inp, trn[t]);
    // outputs: values, order and cycle of appearance
    begin
      int q;
      q = 0;
      for (t = 0; t + 2 < NT; t++) begin
        if (inp[t] < 0) continue;
        for (int j = 0; j < N2; j++) begin
          if (q >= got_val.size()) begin check("output present", 0, 1); break; end
          check("output index", got_idx[q], j);
          check($sformatf("output value in %0d n%0d", inp[t], j), int'(got_val[q]), int'(mdl.a2[inp[t]][j]));
          check("output cycle", int'(got_t[q] - jc_start[t0+t+2]), (j / NPC2 + 1) * CPN2);
          q++;
        end
      end
      check("output count", got_val.size(), q);
    end
    // trained weights and biases read back through the host port
    for (int jn = 0; jn < 2; jn++)
      for (int k = 0; k < (jn ? Z2 : Z1); k++)
        for (int c = 0; c < C; c++) begin
          cfg_junc = jn[0]; cfg_w_re = 1'b1; cfg_lane = 16'(k); cfg_addr = 16'(c);
          @(negedge clk);
          cfg_w_re = 1'b0;
          check($sformatf("weight j%0d lane %0d row %0d", jn+1, k, c), int'(cfg_rdata),
                int'(jn ? mdl.w2[k][c] : mdl.w1[k][c]));
        end
    for (int jn = 0; jn < 2; jn++)
      for (int j = 0; j < (jn ? N2 : N1); j++) begin
        cfg_junc = jn[0]; cfg_bidx = 16'(j);
        #1;
        check($sformatf("bias j%0d n%0d", jn+1, j), int'(cfg_bdata), int'(jn ? mdl.b2[j] : mdl.b1[j]));
      end
    for (int k = 0; k < Z1; k++) for (int c = 0; c < C; c++) if (mdl.w1[k][c] != w1_init[k][c]) n_moved++;
    for (int k = 0; k < Z2; k++) for (int c = 0; c < C; c++) if (mdl.w2[k][c] != w2_init[k][c]) n_moved++;
    check("training changed weights", int'(n_moved > 0), 1);
    // every mechanism must have happened
    $display("mechanisms: all-ops-concurrent cycles=%0d bubbles=%0d inference jcs=%0d relu-gated BP writes=%0d saturated outputs=%0d weights moved=%0d",
             n_overlap, n_bubble, n_infer, n_gate, n_sat, n_moved);
    check("operational parallelism + junction pipelining seen", int'(n_overlap > 0), 1);
    check("pipeline bubble seen", int'(n_bubble > 0), 1);
    check("inference-only junction cycle seen", int'(n_infer > 0), 1);
    check("ReLU derivative gating in BP seen", int'(n_gate > 0), 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
