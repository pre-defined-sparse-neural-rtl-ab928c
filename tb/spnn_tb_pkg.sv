// spnn_tb_pkg: reference model of the two-junction pre-defined sparse network
// accelerator, used by the end-to-end testbenches.
//
// The model works at junction-cycle granularity and follows the pipelined
// training schedule rather than textbook backpropagation: in junction cycle
// T, junction 1 runs FF on input T-1 and UP on input T-4, junction 2 runs FF
// on input T-2 and BP/UP on input T-3. All FF and BP work of a junction cycle
// uses the weights and biases as they were at its start; the updates are
// applied afterwards. The connection pattern is derived from the seed vectors
// independently of the RTL: edge c*Z+k connects right neuron (c*Z+k)/DIN to
// left neuron ((phi[k]+c) mod D)*Z+k. Arithmetic uses the package functions
// that define the number format (mulq, wstep, sat).
package spnn_tb_pkg;
  import spnn_pkg::*;

  class spnn_model #(
    int N0 = 12, int N1 = 8, int N2 = 2,
    int DOUT1 = 2, int DOUT2 = 1, int Z1 = 6, int Z2 = 2, int MAXIN = 16
  );
    localparam int C    = N0 * DOUT1 / Z1;
    localparam int D1   = N0 / Z1;
    localparam int D2   = N1 / Z2;
    localparam int DIN1 = N0 * DOUT1 / N1;
    localparam int DIN2 = N1 * DOUT2 / N2;

    data_t w1 [Z1][C];
    data_t w2 [Z2][C];
    data_t b1 [N1];
    data_t b2 [N2];
    int    phi1 [Z1];
    int    phi2 [Z2];

    data_t a0  [MAXIN][N0];
    data_t lab [MAXIN][N2];
    data_t a1  [MAXIN][N1];
    bit    ad1 [MAXIN][N1];
    data_t a2  [MAXIN][N2];
    data_t d2  [MAXIN][N2];
    data_t d1  [MAXIN][N1];

    // Left neuron of lane k in edge cycle c.
    static function int left_of(int phi, int c, int k, int d, int z);
      return ((phi + c) % d) * z + k;
    endfunction

    // FF of junction 1 on input m.
    function void ff1(int m);
      acc_t h [N1];
      foreach (h[j]) h[j] = '0;
      for (int c = 0; c < C; c++)
        for (int k = 0; k < Z1; k++)
          h[(c*Z1+k)/DIN1] += mulq(w1[k][c], a0[m][left_of(phi1[k], c, k, D1, Z1)]);
      for (int j = 0; j < N1; j++) begin
        data_t hs;
        hs = sat(h[j] + acc_t'(b1[j]));
        a1[m][j]  = (hs > 0) ? hs : '0;
        ad1[m][j] = (hs > 0);
      end
    endfunction

    // FF of junction 2 (linear output, delta_L = a - y) on input m.
    function void ff2(int m);
      acc_t h [N2];
      foreach (h[j]) h[j] = '0;
      for (int c = 0; c < C; c++)
        for (int k = 0; k < Z2; k++)
          h[(c*Z2+k)/DIN2] += mulq(w2[k][c], a1[m][left_of(phi2[k], c, k, D2, Z2)]);
      for (int j = 0; j < N2; j++) begin
        a2[m][j] = sat(h[j] + acc_t'(b2[j]));
        d2[m][j] = sat(acc_t'(a2[m][j]) - acc_t'(lab[m][j]));
      end
    endfunction

    // BP of junction 2 on input m: partial sums stored per sweep.
    function void bp2(int m);
      data_t part [N1];
      for (int c = 0; c < C; c++)
        for (int k = 0; k < Z2; k++) begin
          int   l;
          acc_t p;
          l = left_of(phi2[k], c, k, D2, Z2);
          p = mulq(w2[k][c], d2[m][(c*Z2+k)/DIN2]);
          part[l] = (c < D2) ? sat(p) : sat(acc_t'(part[l]) + p);
        end
      for (int l = 0; l < N1; l++) d1[m][l] = ad1[m][l] ? part[l] : '0;
    endfunction

    function void up2(int m);
      for (int c = 0; c < C; c++)
        for (int k = 0; k < Z2; k++)
          w2[k][c] = sat(acc_t'(w2[k][c]) -
                         wstep(a1[m][left_of(phi2[k], c, k, D2, Z2)], d2[m][(c*Z2+k)/DIN2]));
      for (int j = 0; j < N2; j++) b2[j] = sat(acc_t'(b2[j]) - (acc_t'(d2[m][j]) >>> ETA_SHIFT));
    endfunction

    function void up1(int m);
      for (int c = 0; c < C; c++)
        for (int k = 0; k < Z1; k++)
          w1[k][c] = sat(acc_t'(w1[k][c]) -
                         wstep(a0[m][left_of(phi1[k], c, k, D1, Z1)], d1[m][(c*Z1+k)/DIN1]));
      for (int j = 0; j < N1; j++) b1[j] = sat(acc_t'(b1[j]) - (acc_t'(d1[m][j]) >>> ETA_SHIFT));
    endfunction

    // One junction cycle. inp[t] is the input index loaded in junction cycle t
    // (-1 for none); train is the mode of junction cycle t.
    function void step(int t, int inp [], bit train);
      int m;
      if (t >= 1) begin m = inp[t-1]; if (m >= 0) ff1(m); end
      if (t >= 2) begin m = inp[t-2]; if (m >= 0) ff2(m); end
      if (t >= 3) begin m = inp[t-3]; if (m >= 0 && train) bp2(m); end
      if (t >= 3) begin m = inp[t-3]; if (m >= 0 && train) up2(m); end
      if (t >= 4) begin m = inp[t-4]; if (m >= 0 && train) up1(m); end
    endfunction
  endclass
endpackage
