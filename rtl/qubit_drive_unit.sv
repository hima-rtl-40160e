// qubit_drive_unit: one XY or Z drive channel (also a qubit readout output unit).
//
// Chain, after the paper's drive-unit figure: classical execution unit ->
// quantum operation buffer -> waveform generator (reading the quantum
// operation LUT) -> waveform FIFO -> switch (with the IDLE data LUT) -> DAC.
// The unit stores and parses its own qubit's program, so parsing cost does
// not grow with the qubit count. The classical execution unit runs ahead
// until the operation buffer is full or a BR waits for feedback; the
// waveform FIFO is read at the DAC rate, and the switch plays IDLE data in
// place of a trigger-flagged sample until the synchronized trigger comes.
// The paper's readout output unit has the same chain without the switch
// drawn; this design uses the same unit there so readout pulses also start
// on the trigger (the paper says timing control works as in the drive unit).
//
// Configuration (cfg_* already addressed to this unit): bank MEM_PROG =
// program words, MEM_WAVE = quantum operation LUT, MEM_REG = prog_len,
// loops, fb_sel, IDLE value. Depths are this design's choices.
//
// Timing: start (from the process manager) restarts the program; trig (from
// the dispatcher) releases the next held operation, whose first sample shows
// on dac_data one cycle later. busy stays high until the program is parsed
// and its last sample has been played. fb_valid with fb_vec carries the module's
// feedback word; the unit takes bit fb_sel.
module qubit_drive_unit
  import hima_pkg::*;
#(
  parameter int PROG_DEPTH = 1024,
  parameter int WAVE_DEPTH = 2048,
  parameter int QOP_DEPTH  = 16,
  parameter int WF_DEPTH   = 64,
  parameter int FB_W       = 24
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            cfg_we,
  input  logic [2:0]      cfg_bank,
  input  logic [13:0]     cfg_word,
  input  logic [31:0]     cfg_data,
  input  logic            start,
  input  logic            trig,
  input  logic            fb_valid,
  input  logic [FB_W-1:0] fb_vec,
  output logic [15:0]     dac_data,
  output logic            played,
  output logic            released,
  output logic            busy,
  output logic            br_wait
);
  logic ceu_busy;
  logic [15:0] prog_len, loops, idle_value;
  logic [$clog2(FB_W)-1:0] fb_sel;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      prog_len   <= '0;
      loops      <= 16'd1;
      fb_sel     <= '0;
      idle_value <= '0;
    end else if (cfg_we && cfg_bank == MEM_REG) begin
      unique case (cfg_word)
        REG_PROG_LEN: prog_len   <= cfg_data[15:0];
        REG_LOOPS:    loops      <= cfg_data[15:0];
        REG_FB_SEL:   fb_sel     <= cfg_data[$clog2(FB_W)-1:0];
        REG_IDLE:     idle_value <= cfg_data[15:0];
        default: ;
      endcase
    end
  end

  qop_t    q_in, q_out;
  logic    q_push, q_pop, q_full, q_empty;
  sample_t s_in, s_out;
  logic    s_push, s_pop, s_full, s_empty;
  logic    gen_active, holding;

  classical_exec_unit #(.PROG_DEPTH(PROG_DEPTH)) u_ceu (
    .clk, .rst_n,
    .prog_we   (cfg_we && cfg_bank == MEM_PROG),
    .prog_waddr(cfg_word[$clog2(PROG_DEPTH)-1:0]),
    .prog_wdata(cfg_data),
    .prog_len, .loops,
    .start, .busy(ceu_busy), .br_wait,
    .fb_valid, .fb_bit(fb_vec[fb_sel]),
    .qop_push(q_push), .qop(q_in), .qop_full(q_full)
  );

  sync_fifo #(.WIDTH(QOP_W), .DEPTH(QOP_DEPTH)) u_qop_buf (
    .clk, .rst_n, .push(q_push), .wdata(q_in), .pop(q_pop), .rdata(q_out),
    .full(q_full), .empty(q_empty), .count()
  );

  waveform_generator #(.WAVE_DEPTH(WAVE_DEPTH)) u_gen (
    .clk, .rst_n,
    .lut_we   (cfg_we && cfg_bank == MEM_WAVE),
    .lut_waddr(cfg_word[$clog2(WAVE_DEPTH)-1:0]),
    .lut_wdata(cfg_data[15:0]),
    .qop(q_out), .qop_empty(q_empty), .qop_pop(q_pop),
    .wf_push(s_push), .wf_sample(s_in), .wf_full(s_full), .active(gen_active)
  );

  sync_fifo #(.WIDTH(SAMPLE_W), .DEPTH(WF_DEPTH)) u_wf_fifo (
    .clk, .rst_n, .push(s_push), .wdata(s_in), .pop(s_pop), .rdata(s_out),
    .full(s_full), .empty(s_empty), .count()
  );

  // Busy until the last sample of the program has left for the DAC.
  assign busy = ceu_busy || !q_empty || gen_active || !s_empty;

  output_switch u_switch (
    .clk, .rst_n, .head(s_out), .empty(s_empty), .pop(s_pop),
    .trig_in(trig), .idle_value, .dac_data, .played, .released, .holding
  );
endmodule
