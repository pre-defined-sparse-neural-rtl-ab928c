// pipeline_ctrl: junction-cycle timer and junction-pipelining schedule.
//
// All junctions are balanced to the same junction cycle of JC = C + FLUSH
// clock cycles (C edge cycles plus FLUSH cycles for the last writes to land).
// The controller counts the junction cycle (`cyc`), marks its first cycle
// (`first`) and its last (`last`, when the queues rotate and the delta pairs
// swap), and remembers which of the last 2L junction cycles loaded an input.
// With input m loaded in junction cycle T = m, the schedule is:
//   FF of junction i on input m        in T = m + i
//   BP and UP of junction i on input m  in T = m + 2L + 1 - i
// (junction L forms delta_L during its FF, junction L's BP/UP follow one
// junction cycle later, and each BP feeds the next UP/BP to its left one
// junction cycle after that). ff_en[i-1] and bpup_en[i-1] tell junction i
// whether an input is at that stage, so the pipeline fills and drains
// correctly when inputs are not presented back to back.
//
// Interface: in_valid is sampled in the first cycle of a junction cycle.
// `train` = 0 turns BP and UP off (inference only).
module pipeline_ctrl #(
  parameter int L  = 2,
  parameter int C  = 100,
  parameter int FLUSH = 2,
  localparam int JC = C + FLUSH,
  localparam int CW = $clog2(JC)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  input  logic          train,
  output logic [CW-1:0] cyc,
  output logic          first,
  output logic          last,
  output logic          loading,
  output logic [L-1:0]  ff_en,
  output logic [L-1:0]  bpup_en,
  output logic          busy
);
  logic [2*L:1] hist;      // hist[d]: an input was loaded d junction cycles ago
  logic         loaded;    // an input is being loaded in this junction cycle

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cyc    <= '0;
      hist   <= '0;
      loaded <= 1'b0;
    end else begin
      cyc <= last ? '0 : cyc + CW'(1);
      if (first) loaded <= in_valid;
      if (last)  hist   <= {hist[2*L-1:1], loaded};
    end
  end

  always_comb begin
    first   = (cyc == '0);
    last    = (int'(cyc) == JC-1);
    loading = first ? in_valid : loaded;
    for (int i = 1; i <= L; i++) begin
      ff_en[i-1]   = hist[i];
      bpup_en[i-1] = train && hist[2*L+1-i];
    end
    busy = loading || (|hist);
  end

  initial assert (FLUSH >= 1) else $fatal(1, "pipeline_ctrl: FLUSH must be at least 1");
endmodule
