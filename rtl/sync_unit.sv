// sync_unit: aligns incoming triggers to the periodic synchronization pulse.
//
// A trigger crossing between boards can land a cycle early or late on
// different boards. Every board sees the same periodic synchronization pulse
// (a fixed phase relation, since all run from one reference clock), so a
// trigger is held here and passed on only with the next pulse: all boards
// then release it in the same cycle. Chosen as a multiple of every local
// oscillator period, the pulse also keeps drive phases equal from shot to
// shot. The paper gives this function; one pending bit per process is this
// design's realisation.
//
// Interface: trig_in/trig_out are one bit per process. sync_tick is the
// periodic pulse. Timing: a trigger in cycle t leaves in the cycle after the
// first sync_tick at or after t (registered output).
module sync_unit #(
  parameter int N = 32
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         sync_tick,
  input  logic [N-1:0] trig_in,
  output logic [N-1:0] trig_out
);
  logic [N-1:0] pend;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pend     <= '0;
      trig_out <= '0;
    end else if (sync_tick) begin
      trig_out <= pend | trig_in;
      pend     <= '0;
    end else begin
      trig_out <= '0;
      pend     <= pend | trig_in;
    end
  end
endmodule
