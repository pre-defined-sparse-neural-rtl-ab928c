// tb_bp_unit: a backpropagation unit with Z=4 lanes and in-degree 2 (lanes
// 0-1 belong to the first right neuron of the cycle, lanes 2-3 to the second),
// driven with random weights, right deltas, stored partial sums and ReLU
// derivative bits in all combinations of first/last sweep. Each lane's result
// is compared with the independently computed W*delta (+ partial), saturated,
// and zeroed in the last sweep when the derivative bit is 0.
module tb_bp_unit;
  import spnn_pkg::*;
  logic first_sweep, last_sweep;
  data_t w [4], dr [2], part [4], wdata [4];
  logic [3:0] ad;
  int checks = 0, failures = 0;

  bp_unit #(.Z(4), .DIN(2)) dut (.*);

  function automatic longint clamp(longint x);
    return (x > 32767) ? 32767 : (x < -32768) ? -32768 : x;
  endfunction
  task automatic check(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s: got %0d expected %0d", what, got, exp); end
  endtask

  initial begin
    for (int it = 0; it < 400; it++) begin
      int span;
      span = (it % 8 == 7) ? 32767 : 4000;
      first_sweep = it[0]; last_sweep = it[1];
      for (int k = 0; k < 4; k++) begin
        w[k] = data_t'(int'($urandom % (2*span+1)) - span);
        part[k] = data_t'(int'($urandom % (2*span+1)) - span);
      end
      for (int s = 0; s < 2; s++) dr[s] = data_t'(int'($urandom % (2*span+1)) - span);
      ad = 4'($urandom);
      #1;
      for (int k = 0; k < 4; k++) begin
        longint p, e;
        p = (longint'(w[k]) * longint'(dr[k/2])) >>> 8;
        e = first_sweep ? clamp(p) : clamp(longint'(part[k]) + p);
        if (last_sweep && !ad[k]) e = 0;
        check($sformatf("it%0d lane%0d", it, k), wdata[k], e);
      end
      #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
