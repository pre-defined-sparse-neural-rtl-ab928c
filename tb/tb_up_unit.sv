// tb_up_unit: an update unit with Z=4 lanes and in-degree 2, driven with
// random weights, left activations, right deltas and biases. Every new weight
// must equal W - (a*delta >> (8+4)) and every new bias b - (delta >> 4), both
// saturated (learning rate 2^-4, 8 fractional bits), computed here with plain
// integers.
module tb_up_unit;
  import spnn_pkg::*;
  data_t w [4], al [4], dr [2], bias [2], w_new [4], b_new [2];
  int checks = 0, failures = 0;

  up_unit #(.Z(4), .DIN(2)) dut (.*);

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
      for (int k = 0; k < 4; k++) begin
        w[k]  = data_t'(int'($urandom % (2*span+1)) - span);
        al[k] = data_t'(int'($urandom % (2*span+1)) - span);
      end
      for (int s = 0; s < 2; s++) begin
        dr[s]   = data_t'(int'($urandom % (2*span+1)) - span);
        bias[s] = data_t'(int'($urandom % (2*span+1)) - span);
      end
      #1;
      for (int k = 0; k < 4; k++)
        check($sformatf("w lane%0d", k), w_new[k],
              clamp(longint'(w[k]) - ((longint'(al[k]) * longint'(dr[k/2])) >>> 12)));
      for (int s = 0; s < 2; s++)
        check($sformatf("b %0d", s), b_new[s], clamp(longint'(bias[s]) - (longint'(dr[s]) >>> 4)));
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
