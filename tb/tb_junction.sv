// tb_junction: one last-layer junction with BP, 12 left and 12 right neurons,
// out-degree 2 (in-degree 2), Z=4 lanes: two right neurons finish per edge
// cycle, 6 edge cycles form two sweeps of the 3-deep left memories, and the
// seed is (1,0,2,2). The left and right memory banks are modelled here as
// plain arrays that answer the junction's read requests one cycle later.
// Weights and biases are loaded through the host port. Three junction cycles
// run with FF, BP and UP all enabled on different random data; after each, the
// outputs and cost derivatives, the left deltas, and (through the host port)
// the updated weights and biases are compared with a reference computed here
// from the connection rule: edge c*4+k joins right neuron (c*4+k)/2 and left
// neuron ((phi[k]+c) mod 3)*4+k.
module tb_junction;
  import spnn_pkg::*;
  localparam int NL = 12, NR = 12, DOUT = 2, Z = 4, ZR = 2;
  localparam int C = NL*DOUT/Z, D = NL/Z, DIN = NL*DOUT/NR, DR = NR/ZR, JC = C + 2;

  logic clk = 0, rst_n = 0, first = 0;
  logic ff_en = 0, bp_en = 0, up_en = 0;
  logic [1:0] phi [Z];
  logic la_re, lb_re, lad_re;
  logic [1:0] laddr [Z];
  data_t la_data [Z], lb_data [Z];
  logic [Z-1:0] lad_data;
  logic [Z-1:0] ld_re, ld_we;
  data_t ld_rdata [Z], ld_wdata [Z];
  logic [1:0] ld_waddr [Z];
  logic [ZR-1:0] rd_re, rw_we, rw_ad;
  logic [2:0] rd_raddr [ZR], rw_waddr [ZR];
  data_t rd_rdata [ZR], rw_a [ZR], rw_delta [ZR];
  data_t y [NR];
  logic out_we;
  logic [3:0] out_idx;
  data_t out_a [2];
  logic cfg_w_we = 0, cfg_w_re = 0, cfg_b_we = 0;
  logic [1:0] cfg_lane = '0;
  logic [2:0] cfg_addr = '0;
  logic [3:0] cfg_bidx = '0;
  data_t cfg_wdata = '0, cfg_rdata, cfg_bdata;

  junction #(.NL(NL), .NR(NR), .DOUT(DOUT), .Z(Z), .ZR(ZR), .HAS_BP(1'b1), .LAST(1'b1)) dut (.*);
  always #5 clk = ~clk;

  // behavioural banks (neuron-indexed)
  data_t aF [NL], aU [NL], dL [NL], dR [NR];
  bit    adL [NL];
  data_t gotA [NR], gotD [NR];
  // reference state
  data_t W [Z][C], B [NR];
  int checks = 0, failures = 0;

  always @(posedge clk) begin
    for (int k = 0; k < Z; k++) begin
      if (la_re) la_data[k] <= aF[laddr[k]*Z + k];
      if (lb_re) lb_data[k] <= aU[laddr[k]*Z + k];
      if (lad_re) lad_data[k] <= adL[laddr[k]*Z + k];
      if (ld_re[k]) ld_rdata[k] <= dL[laddr[k]*Z + k];
      if (ld_we[k]) dL[ld_waddr[k]*Z + k] <= ld_wdata[k];
    end
    for (int m = 0; m < ZR; m++) begin
      if (rd_re[m]) rd_rdata[m] <= dR[rd_raddr[m]*ZR + m];
      if (rw_we[m]) begin
        gotA[rw_waddr[m]*ZR + m] <= rw_a[m];
        gotD[rw_waddr[m]*ZR + m] <= rw_delta[m];
      end
    end
  end

  function automatic longint clamp(longint x);
    return (x > 32767) ? 32767 : (x < -32768) ? -32768 : x;
  endfunction
  function automatic int lft(int c, int k);
    return ((int'(phi[k]) + c) % D) * Z + k;
  endfunction
  task automatic check(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s: got %0d expected %0d", what, got, exp); end
  endtask
  function automatic data_t r(int span);
    return data_t'(int'($urandom % (2*span + 1)) - span);
  endfunction

  initial begin
    longint h [NR], part [NL], eA [NR], eD [NR], eL [NL];
    int n_out;
    phi = '{2'd1, 2'd0, 2'd2, 2'd2};
    for (int j = 0; j < NR; j++) y[j] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int k = 0; k < Z; k++)
      for (int c = 0; c < C; c++) begin
        W[k][c] = r(300);
        cfg_w_we = 1; cfg_lane = 2'(k); cfg_addr = 3'(c); cfg_wdata = W[k][c];
        @(negedge clk);
      end
    cfg_w_we = 0;
    for (int j = 0; j < NR; j++) begin
      B[j] = r(100);
      cfg_b_we = 1; cfg_bidx = 4'(j); cfg_wdata = B[j];
      @(negedge clk);
    end
    cfg_b_we = 0;
    for (int t = 0; t < 3; t++) begin
      for (int n = 0; n < NL; n++) begin aF[n] = r(600); aU[n] = r(600); adL[n] = 1'($urandom); dL[n] = r(50); end
      for (int j = 0; j < NR; j++) begin dR[j] = r(400); y[j] = r(400); end
      // reference
      foreach (h[j]) h[j] = 0;
      for (int c = 0; c < C; c++)
        for (int k = 0; k < Z; k++) begin
          int j, l;
          longint p;
          j = (c*Z + k) / DIN;
          l = lft(c, k);
          h[j] += (longint'(W[k][c]) * aF[l]) >>> 8;
          p = (longint'(W[k][c]) * dR[j]) >>> 8;
          part[l] = (c < D) ? clamp(p) : clamp(part[l] + p);
        end
      for (int j = 0; j < NR; j++) begin eA[j] = clamp(h[j] + B[j]); eD[j] = clamp(eA[j] - y[j]); end
      for (int l = 0; l < NL; l++) eL[l] = adL[l] ? part[l] : 0;
      // one junction cycle with all three operations
      ff_en = 1; bp_en = 1; up_en = 1;
      n_out = 0;
      for (int c = 0; c < JC; c++) begin
        first = (c == 0);
        @(posedge clk);
        if (out_we) n_out++;
        @(negedge clk);
      end
      first = 0; ff_en = 0; bp_en = 0; up_en = 0;
      check("outputs written", n_out, NR / 2);
      for (int j = 0; j < NR; j++) begin
        check($sformatf("t%0d a[%0d]", t, j), gotA[j], eA[j]);
        check($sformatf("t%0d delta_L[%0d]", t, j), gotD[j], eD[j]);
      end
      for (int l = 0; l < NL; l++) check($sformatf("t%0d left delta[%0d]", t, l), dL[l], eL[l]);
      // reference update, then read back
      for (int c = 0; c < C; c++)
        for (int k = 0; k < Z; k++)
          W[k][c] = data_t'(clamp(longint'(W[k][c]) - ((longint'(aU[lft(c, k)]) * dR[(c*Z+k)/DIN]) >>> 12)));
      for (int j = 0; j < NR; j++) B[j] = data_t'(clamp(longint'(B[j]) - (longint'(dR[j]) >>> 4)));
      for (int k = 0; k < Z; k++)
        for (int c = 0; c < C; c++) begin
          cfg_w_re = 1; cfg_lane = 2'(k); cfg_addr = 3'(c);
          @(negedge clk);
          cfg_w_re = 0;
          check($sformatf("t%0d W lane%0d row%0d", t, k, c), cfg_rdata, W[k][c]);
        end
      for (int j = 0; j < NR; j++) begin
        cfg_bidx = 4'(j);
        #1;
        check($sformatf("t%0d bias %0d", t, j), cfg_bdata, B[j]);
      end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
