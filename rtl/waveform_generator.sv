// waveform_generator: quantum operation to DAC sample stream.
//
// Takes decoded operations from the quantum operation buffer and writes one
// sample per cycle into the waveform FIFO. GATE addr,dur plays dur words of
// the quantum operation LUT (the waveform memory) starting at addr; WAIT dur
// (and MEASURE, should one reach an output unit) emits dur idle samples. The
// first sample of an operation carries the operation's trig flag so the
// output switch can hold it until the synchronized trigger.
//
// The paper describes the generator's role and the LUT it reads; sample
// width (16 bit, the DAC resolution), one sample per clock, and the LUT depth
// are this design's choices. The next operation is loaded in the cycle the
// last sample of the current one is written, so back-to-back operations leave
// no gap and the generator keeps pace with the DAC. An operation with dur = 0
// produces nothing. Samples are written only while the FIFO is not full.
module waveform_generator
  import hima_pkg::*;
#(
  parameter int WAVE_DEPTH = 2048
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // quantum operation LUT load
  input  logic                          lut_we,
  input  logic [$clog2(WAVE_DEPTH)-1:0] lut_waddr,
  input  logic [15:0]                   lut_wdata,
  // quantum operation buffer (show-ahead)
  input  qop_t                          qop,
  input  logic                          qop_empty,
  output logic                          qop_pop,
  // waveform FIFO
  output logic                          wf_push,
  output sample_t                       wf_sample,
  input  logic                          wf_full,
  output logic                          active
);
  localparam int AW = $clog2(WAVE_DEPTH);

  logic [15:0]   lut [WAVE_DEPTH];
  logic [AW-1:0] ptr;
  logic [15:0]   rem;
  logic          first, trig_f, idle_f;
  logic          last, load;

  always_ff @(posedge clk) begin
    if (lut_we) lut[lut_waddr] <= lut_wdata;
  end

  assign wf_push        = active && !wf_full;
  assign wf_sample.trig = first && trig_f;
  assign wf_sample.idle = idle_f;
  assign wf_sample.data = idle_f ? 16'd0 : lut[ptr];
  assign last           = wf_push && (rem == 16'd1);
  assign load           = !qop_empty && (!active || last);
  assign qop_pop        = load;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active <= 1'b0;
      ptr    <= '0;
      rem    <= '0;
      first  <= 1'b0;
      trig_f <= 1'b0;
      idle_f <= 1'b0;
    end else if (load) begin
      active <= (qop.dur != 16'd0);
      ptr    <= AW'(qop.addr);
      rem    <= qop.dur;
      first  <= 1'b1;
      trig_f <= qop.trig;
      idle_f <= (qop.op != OP_GATE);
    end else if (wf_push) begin
      ptr   <= ptr + 1'b1;
      rem   <= rem - 1'b1;
      first <= 1'b0;
      if (last) active <= 1'b0;
    end
  end
endmodule
