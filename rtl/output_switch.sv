// output_switch: synchronized-trigger gate in front of the DAC.
//
// Reads the waveform FIFO at the DAC rate (one sample per cycle). A sample
// whose trig flag is set is held at the FIFO head, and the IDLE data LUT
// value is sent to the DAC instead, until the synchronized trigger arrives;
// then the held sample and all that follow it are played. WAIT samples and
// an empty FIFO also produce the IDLE value. This is the behaviour the paper
// gives for the switch; holding a trigger that arrives before the flagged
// sample reaches the head (so it is not lost) is this design's choice.
//
// Timing: registered output. A trigger in cycle t puts the held sample on
// dac_data in cycle t+1. `released` pulses in the cycle a flagged sample is
// released; `played` is high for every cycle a FIFO sample is output.
module output_switch
  import hima_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  sample_t     head,
  input  logic        empty,
  output logic        pop,
  input  logic        trig_in,
  input  logic [15:0] idle_value,
  output logic [15:0] dac_data,
  output logic        played,
  output logic        released,
  output logic        holding
);
  logic pend;
  logic go;

  assign go       = pend || trig_in;
  assign holding  = !empty && head.trig && !go;
  assign pop      = !empty && !holding;
  assign released = pop && head.trig;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pend     <= 1'b0;
      dac_data <= '0;
      played   <= 1'b0;
    end else begin
      pend     <= go && !released;
      played   <= pop;
      dac_data <= (pop && !head.idle) ? head.data : idle_value;
    end
  end
endmodule
