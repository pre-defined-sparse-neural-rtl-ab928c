// tb_cf_addr_gen: checks the type-1 clash-free address generator.
// First with the worked example of a 12-neuron left layer in Z=4 memories of
// depth D=3 and seed (1,0,2,2): edge cycle 0 must read left neurons
// (4,1,10,11) and cycle 1 addresses (2,1,0,0). Then with random seeds over
// several junction cycles of two sweeps each: every address must equal
// (phi[k]+c) mod D, and within each sweep every left neuron must be read
// exactly once (no clash, no duplicate edge).
module tb_cf_addr_gen;
  localparam int Z = 4, D = 3, C = 6;
  logic clk = 0, rst_n = 0, first = 0, active = 0;
  logic [1:0] phi [Z];
  logic [1:0] addr [Z];
  int checks = 0, failures = 0;

  cf_addr_gen #(.Z(Z), .D(D)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(string what, int got, int exp);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s: got %0d expected %0d", what, got, exp); end
  endtask

  initial begin
    int seen [Z*D];
    phi = '{2'd1, 2'd0, 2'd2, 2'd2};
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int jc = 0; jc < 6; jc++) begin
      if (jc > 0) for (int k = 0; k < Z; k++) phi[k] = 2'($urandom % D);
      for (int c = 0; c < C; c++) begin
        first = (c == 0); active = 1;
        #1;
        if (c % D == 0) foreach (seen[n]) seen[n] = 0;
        for (int k = 0; k < Z; k++) begin
          check($sformatf("jc%0d c%0d lane%0d addr", jc, c, k), int'(addr[k]), (int'(phi[k]) + c) % D);
          seen[int'(addr[k]) * Z + k]++;
        end
        if (jc == 0 && c == 0) begin
          check("fig neuron lane0", int'(addr[0])*Z + 0, 4);
          check("fig neuron lane1", int'(addr[1])*Z + 1, 1);
          check("fig neuron lane2", int'(addr[2])*Z + 2, 10);
          check("fig neuron lane3", int'(addr[3])*Z + 3, 11);
        end
        if (jc == 0 && c == 1) begin
          check("fig cycle1 addr0", int'(addr[0]), 2);
          check("fig cycle1 addr2", int'(addr[2]), 0);
        end
        if (c % D == D-1) foreach (seen[n]) check("neuron read once per sweep", seen[n], 1);
        @(negedge clk);
      end
      first = 0; active = 0;
      @(negedge clk);   // a flush cycle: the counters must hold
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
