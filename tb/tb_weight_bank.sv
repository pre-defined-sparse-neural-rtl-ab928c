// tb_weight_bank: writes every row of a 4-lane, 6-row weight bank lane by
// lane (per-lane enables), reads each row back one cycle after the read
// enable, then reads and rewrites the same row in one cycle and checks that
// the read returns the old row and a later read the new one (the UP unit
// relies on this).
module tb_weight_bank;
  import spnn_pkg::*;
  localparam int Z = 4, C = 6;
  logic clk = 0, re = 0;
  logic [2:0] raddr = '0, waddr = '0;
  logic [Z-1:0] we = '0;
  data_t rdata [Z];
  data_t wdata [Z];
  data_t ref_m [Z][C];
  int checks = 0, failures = 0;

  weight_bank #(.Z(Z), .C(C)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(string what, int got, int exp);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s: got %0d expected %0d", what, got, exp); end
  endtask

  initial begin
    for (int k = 0; k < Z; k++) wdata[k] = '0;
    @(negedge clk);
    for (int c = 0; c < C; c++)
      for (int k = 0; k < Z; k++) begin
        ref_m[k][c] = data_t'($urandom);
        we = '0; we[k] = 1'b1; waddr = 3'(c);
        for (int l = 0; l < Z; l++) wdata[l] = (l == k) ? ref_m[k][c] : ~ref_m[k][c];
        @(negedge clk);
      end
    we = '0;
    for (int c = C-1; c >= 0; c--) begin
      re = 1; raddr = 3'(c);
      @(negedge clk);
      re = 0;
      for (int k = 0; k < Z; k++) check($sformatf("row %0d lane %0d", c, k), int'(rdata[k]), int'(ref_m[k][c]));
    end
    // read and write row 2 in the same cycle
    re = 1; raddr = 3'd2; we = '1; waddr = 3'd2;
    for (int k = 0; k < Z; k++) wdata[k] = data_t'(100 + k);
    @(negedge clk);
    re = 0; we = '0;
    for (int k = 0; k < Z; k++) check("old row on read-during-write", int'(rdata[k]), int'(ref_m[k][2]));
    re = 1;
    @(negedge clk);
    re = 0;
    for (int k = 0; k < Z; k++) check("new row after write", int'(rdata[k]), 100 + k);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
