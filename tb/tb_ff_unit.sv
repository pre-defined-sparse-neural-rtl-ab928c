// tb_ff_unit: two feedforward units driven with random words.
//   A: Z=4 lanes, in-degree 2, hidden layer: two neurons finish every cycle;
//      checks ReLU output and derivative bit against h = sum W*a + b.
//   B: Z=2 lanes, in-degree 4, last layer: a neuron takes two cycles (the
//      partial sum is carried in the accumulator); checks the linear output
//      and the cost derivative a - y.
// The reference arithmetic (product >> 8, saturation to 16 bits) is written
// out here independently with plain integers.
module tb_ff_unit;
  import spnn_pkg::*;
  logic clk = 0, rst_n = 0;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  function automatic longint prod(longint a, longint b);
    return (a * b) >>> 8;
  endfunction
  function automatic longint clamp(longint x);
    return (x > 32767) ? 32767 : (x < -32768) ? -32768 : x;
  endfunction
  task automatic check(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s: got %0d expected %0d", what, got, exp); end
  endtask

  // unit A
  logic  va = 0;
  data_t wa [4], aa [4], ba [2], ya [2], oa [2], oda [2];
  logic  wea;
  logic [1:0] ada;
  ff_unit #(.Z(4), .DIN(2), .LAST(1'b0)) u_a (
    .clk(clk), .rst_n(rst_n), .valid(va), .ndone(1'b1), .w(wa), .a(aa), .bias(ba), .y(ya),
    .o_we(wea), .o_a(oa), .o_ad(ada), .o_delta(oda));

  // unit B
  logic  vb = 0, ndb = 0;
  data_t wb [2], ab [2], bb [1], yb [1], ob [1], odb [1];
  logic  web;
  logic [0:0] adb;
  ff_unit #(.Z(2), .DIN(4), .LAST(1'b1)) u_b (
    .clk(clk), .rst_n(rst_n), .valid(vb), .ndone(ndb), .w(wb), .a(ab), .bias(bb), .y(yb),
    .o_we(web), .o_a(ob), .o_ad(adb), .o_delta(odb));

  function automatic data_t r(int span);
    return data_t'(int'($urandom % (2*span + 1)) - span);
  endfunction

  initial begin
    for (int k = 0; k < 4; k++) begin wa[k] = '0; aa[k] = '0; end
    for (int k = 0; k < 2; k++) begin ba[k] = '0; ya[k] = '0; wb[k] = '0; ab[k] = '0; end
    bb[0] = '0; yb[0] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int it = 0; it < 200; it++) begin
      longint h, hb;
      int span;
      span = (it % 10 == 9) ? 32767 : 3000;   // some cycles saturate
      va = 1;
      for (int k = 0; k < 4; k++) begin wa[k] = r(span); aa[k] = r(span); end
      for (int s = 0; s < 2; s++) ba[s] = r(500);
      #1;
      check("A we", wea, 1);
      for (int s = 0; s < 2; s++) begin
        h = clamp(prod(wa[2*s], aa[2*s]) + prod(wa[2*s+1], aa[2*s+1]) + ba[s]);
        check($sformatf("A a[%0d]", s), oa[s], (h > 0) ? h : 0);
        check($sformatf("A ad[%0d]", s), ada[s], (h > 0) ? 1 : 0);
      end
      // unit B: two cycles for one neuron
      hb = 0;
      vb = 1; ndb = 0;
      for (int k = 0; k < 2; k++) begin wb[k] = r(span); ab[k] = r(span); hb += prod(wb[k], ab[k]); end
      #1;
      check("B no write mid-neuron", web, 0);
      @(negedge clk);
      va = 0;
      ndb = 1;
      for (int k = 0; k < 2; k++) begin wb[k] = r(span); ab[k] = r(span); hb += prod(wb[k], ab[k]); end
      bb[0] = r(500); yb[0] = r(3000);
      #1;
      hb = clamp(hb + bb[0]);
      check("B we", web, 1);
      check("B a", ob[0], hb);
      check("B delta", odb[0], clamp(hb - yb[0]));
      @(negedge clk);
      vb = 0; ndb = 0;
      @(negedge clk);
    end
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
