// tb_pipeline_ctrl: a controller for L=3 junctions with C=5, FLUSH=2 (junction
// cycle of 7 clocks). Inputs are offered in a random pattern of junction
// cycles and training is switched off for a while. In every junction cycle T
// the test checks that first/last mark clocks 0 and 6, that FF of junction i
// is enabled exactly when an input was loaded in T-i, and BP/UP of junction i
// exactly when one was loaded in T-(2L+1-i) and training is on.
module tb_pipeline_ctrl;
  localparam int L = 3, C = 5, FLUSH = 2, JC = C + FLUSH;
  logic clk = 0, rst_n = 0, in_valid = 0, train = 1;
  logic [2:0] cyc;
  logic first, last, loading, busy;
  logic [L-1:0] ff_en, bpup_en;
  int checks = 0, failures = 0;
  bit ld [64];

  pipeline_ctrl #(.L(L), .C(C), .FLUSH(FLUSH)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(string what, int got, int exp);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s: got %0d expected %0d", what, got, exp); end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 40; t++) begin
      ld[t] = (t < 30) && ($urandom % 3 != 0);
      train = !(t >= 15 && t < 20);
      for (int c = 0; c < JC; c++) begin
        in_valid = (c == 0) ? ld[t] : 1'($urandom);
        #1;
        check("first", first, c == 0);
        check("last", last, c == JC-1);
        check("cyc", int'(cyc), c);
        check("loading", loading, ld[t]);
        for (int i = 1; i <= L; i++) begin
          check($sformatf("T%0d ff_en[%0d]", t, i), ff_en[i-1], (t - i >= 0) ? ld[t-i] : 0);
          check($sformatf("T%0d bpup_en[%0d]", t, i), bpup_en[i-1],
                (t - (2*L+1-i) >= 0) ? (ld[t-(2*L+1-i)] && train) : 0);
        end
        @(negedge clk);
      end
    end
    in_valid = 0;
    #1;
    check("idle after drain", busy, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
