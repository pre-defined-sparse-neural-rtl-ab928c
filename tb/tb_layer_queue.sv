// tb_layer_queue: a 3-bank queue (as for layer L-1) with 4 memories of depth 3.
// In each junction cycle the test writes a fresh layer (input m) in natural
// order and, over interleaved addresses, reads port A and port B. Port A must
// return the layer of input m-1 and port B that of input m-2 (the oldest
// still held), for every lane and address, over several rotations.
module tb_layer_queue;
  import spnn_pkg::*;
  localparam int NB = 3, Z = 4, D = 3;
  logic clk = 0, rst_n = 0, rotate = 0, ra_en = 0, rb_en = 0;
  logic [Z-1:0] we = '0;
  logic [1:0] waddr [Z], ra_addr [Z], rb_addr [Z];
  data_t wdata [Z], ra_data [Z], rb_data [Z];
  int checks = 0, failures = 0;

  layer_queue #(.NB(NB), .Z(Z), .D(D), .T(data_t)) dut (.*);
  always #5 clk = ~clk;

  function automatic data_t val(int m, int n);
    return data_t'(m * 37 + n * 5 + 1);
  endfunction

  task automatic check(string what, int got, int exp);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s: got %0d expected %0d", what, got, exp); end
  endtask

  initial begin
    for (int k = 0; k < Z; k++) begin waddr[k] = '0; ra_addr[k] = '0; rb_addr[k] = '0; wdata[k] = '0; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int m = 0; m < 7; m++) begin
      for (int c = 0; c < D; c++) begin
        // write neurons c*Z .. c*Z+Z-1 (natural order) of input m
        we = '1;
        for (int k = 0; k < Z; k++) begin waddr[k] = 2'(c); wdata[k] = val(m, c*Z + k); end
        // interleaved reads: lane k reads address (k + c) mod D
        ra_en = 1; rb_en = 1;
        for (int k = 0; k < Z; k++) begin ra_addr[k] = 2'((k + c) % D); rb_addr[k] = 2'((2*k + c) % D); end
        @(negedge clk);
        we = '0; ra_en = 0; rb_en = 0;
        for (int k = 0; k < Z; k++) begin
          if (m >= 1) check($sformatf("A m%0d c%0d k%0d", m, c, k), int'(ra_data[k]), int'(val(m-1, ((k + c) % D)*Z + k)));
          if (m >= 2) check($sformatf("B m%0d c%0d k%0d", m, c, k), int'(rb_data[k]), int'(val(m-2, ((2*k + c) % D)*Z + k)));
        end
      end
      rotate = 1;
      @(negedge clk);
      rotate = 0;
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
