// tb_delta_pair: a delta pair with 2 memories of depth 4. Each junction cycle
// the test accumulates into the write bank read-modify-write (the read data
// of one cycle, plus an increment, is written back in the next), then swaps.
// In the following junction cycle the read bank must return the final sums,
// while the new write bank is accumulated independently.
module tb_delta_pair;
  import spnn_pkg::*;
  localparam int Z = 2, D = 4;
  logic clk = 0, rst_n = 0, swap = 0;
  logic [Z-1:0] wb_re = '0, wb_we = '0, rb_re = '0;
  logic [1:0] wb_raddr [Z], wb_waddr [Z], rb_raddr [Z];
  data_t wb_rdata [Z], wb_wdata [Z], rb_rdata [Z];
  int checks = 0, failures = 0;

  delta_pair #(.Z(Z), .D(D)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(string what, int got, int exp);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s: got %0d expected %0d", what, got, exp); end
  endtask

  // expected final value of neuron (memory k, address a) in junction cycle t
  function automatic int fin(int t, int k, int a);
    return 10*t + 3*k + a + (t + k + a) % 5 + 2*(t + 1);
  endfunction

  initial begin
    for (int k = 0; k < Z; k++) begin wb_raddr[k] = '0; wb_waddr[k] = '0; rb_raddr[k] = '0; wb_wdata[k] = '0; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 5; t++) begin
      // pass 0: write initial value; pass 1: read; pass 2: write value + 2*(t+1)
      for (int a = 0; a < D; a++) begin
        wb_we = '1;
        for (int k = 0; k < Z; k++) begin wb_waddr[k] = 2'(a); wb_wdata[k] = data_t'(10*t + 3*k + a + (t + k + a) % 5); end
        // read bank checked against the previous junction cycle's sums
        rb_re = (t > 0) ? '1 : '0;
        for (int k = 0; k < Z; k++) rb_raddr[k] = 2'(a);
        @(negedge clk);
        wb_we = '0; rb_re = '0;
        if (t > 0) for (int k = 0; k < Z; k++) check($sformatf("read bank t%0d k%0d a%0d", t, k, a), int'(rb_rdata[k]), fin(t-1, k, a));
      end
      for (int a = 0; a < D; a++) begin
        wb_re = '1;
        for (int k = 0; k < Z; k++) wb_raddr[k] = 2'(a);
        @(negedge clk);
        wb_re = '0;
        wb_we = '1;
        for (int k = 0; k < Z; k++) begin wb_waddr[k] = 2'(a); wb_wdata[k] = wb_rdata[k] + data_t'(2*(t + 1)); end
        @(negedge clk);
        wb_we = '0;
      end
      swap = 1;
      @(negedge clk);
      swap = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
