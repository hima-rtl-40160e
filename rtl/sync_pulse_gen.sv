// sync_pulse_gen: the periodic synchronization signal.
//
// A free-running counter that pulses sync_tick once every PERIOD cycles,
// starting from reset, so every board reset together ticks in the same
// cycle. The paper asks for a common period that is a whole multiple of all
// local oscillator periods; PERIOD = 8 clock cycles is this design's default.
// Interface: sync_tick high for one cycle in every PERIOD.
module sync_pulse_gen #(
  parameter int PERIOD = 8
) (
  input  logic clk,
  input  logic rst_n,
  output logic sync_tick
);
  logic [$clog2(PERIOD)-1:0] cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt       <= '0;
      sync_tick <= 1'b0;
    end else begin
      sync_tick <= (cnt == '0);
      cnt       <= (cnt == ($clog2(PERIOD))'(PERIOD - 1)) ? '0 : cnt + 1'b1;
    end
  end
endmodule
