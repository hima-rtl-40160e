// dispatcher: relays every process's strobes to the execution units.
//
// Each of the N process managers produces start, trigger and feedback strobe
// vectors over the M units of the module. Because a unit belongs to at most
// one process at a time, the dispatcher merges them per unit and registers
// the result. An assertion flags two processes hitting one unit in the
// same cycle, which means overlapping masks. The relaying role is the
// paper's; the merge-and-register realisation is this design's.
//
// Timing: one register stage, strobes reach the units one cycle after the
// process managers raise them.
module dispatcher #(
  parameter int N = 32,
  parameter int M = 8
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [M-1:0] pm_start [N],
  input  logic [M-1:0] pm_trig  [N],
  input  logic [M-1:0] pm_fb    [N],
  output logic [M-1:0] unit_start,
  output logic [M-1:0] unit_trig,
  output logic [M-1:0] unit_fb,
  output logic         conflict
);
  logic [M-1:0] s, t, f, seen;

  always_comb begin
    s = '0; t = '0; f = '0; seen = '0; conflict = 1'b0;
    for (int p = 0; p < N; p++) begin
      if (|(seen & (pm_trig[p] | pm_fb[p]))) conflict = 1'b1;
      seen |= pm_trig[p] | pm_fb[p];
      s |= pm_start[p];
      t |= pm_trig[p];
      f |= pm_fb[p];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      unit_start <= '0;
      unit_trig  <= '0;
      unit_fb    <= '0;
    end else begin
      unit_start <= s;
      unit_trig  <= t;
      unit_fb    <= f;
    end
  end

  a_no_conflict: assert property (@(posedge clk) disable iff (!rst_n) !conflict);
endmodule
