// readout_module: the feedline I/O module (one readout board).
//
// F feedline output / input unit pairs, K qubits per feedline, behind the
// module's process front end. The paper's readout board has 4 pairs of 6
// qubits each (F = 4, K = 6), 24 qubits per board. Unit numbering for
// masks and configuration is this design's: units 0..F*K-1 are the readout
// output units (feedline f, qubit k -> f*K+k), units F*K..2*F*K-1 the readout
// input units in the same order. Qubit q of the board is output unit q and
// input unit F*K+q.
//
// Results: res_* per qubit for the host (state, intermediate or raw data);
// fbk_valid/fbk_state per qubit for measurements flagged for feedback, sent
// up to the leaf controller.
// proc_busy / proc_ready per process as in drive_module.
// Timing: as drive_module; results follow the end of each measurement by
// one cycle.
module readout_module
  import hima_pkg::*;
#(
  parameter int N          = 32,
  parameter int F          = 4,
  parameter int K          = 6,
  parameter int PROG_DEPTH = 1024,
  parameter int WAVE_DEPTH = 2048,
  parameter int ADC_W      = 11,
  parameter int FB_W       = 24
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    sync_tick,
  input  logic                    cfg_we,
  input  logic [5:0]              cfg_unit,
  input  logic [2:0]              cfg_bank,
  input  logic [13:0]             cfg_word,
  input  logic [31:0]             cfg_data,
  input  logic [N-1:0]            trig_in,
  input  logic [N-1:0]            fb_valid_in,
  input  logic [FB_W-1:0]         fb_vec,
  output logic [15:0]             dac_data [F],
  input  logic signed [ADC_W-1:0] adc_data [F],
  output logic [F*K-1:0]          res_valid,
  output logic [1:0]              res_dtype [F*K],
  output logic [31:0]             res_data  [F*K],
  output logic [F*K-1:0]          fbk_valid,
  output logic [F*K-1:0]          fbk_state,
  output logic [F*K-1:0]          measuring,
  output logic [N-1:0]            proc_busy,
  output logic [N-1:0]    proc_ready
);
  localparam int Q = F * K;
  localparam int M = 2 * Q;

  logic [M-1:0] u_start, u_trig, u_fb, u_busy;
  logic [Q-1:0] released;

  exec_module_ctrl #(.N(N), .M(M)) u_ctrl (
    .clk, .rst_n, .sync_tick,
    .cfg_we(cfg_we && cfg_unit == 6'(UNIT_CTRL)), .cfg_bank, .cfg_word, .cfg_data,
    .trig_in, .fb_valid_in, .unit_busy(u_busy),
    .unit_start(u_start), .unit_trig(u_trig), .unit_fb(u_fb), .proc_busy, .proc_ready
  );

  for (genvar f = 0; f < F; f++) begin : g_fl
    feedline_output_unit #(.K(K), .PROG_DEPTH(PROG_DEPTH), .WAVE_DEPTH(WAVE_DEPTH), .FB_W(FB_W)) u_fo (
      .clk, .rst_n,
      .cfg_we(cfg_we && 6'(cfg_unit - 6'(f*K)) < 6'(K)),
      .cfg_unit(cfg_unit - 6'(f*K)), .cfg_bank, .cfg_word, .cfg_data,
      .start(u_start[f*K +: K]), .trig(u_trig[f*K +: K]), .fb_valid(u_fb[f*K +: K]), .fb_vec,
      .dac_data(dac_data[f]), .busy(u_busy[f*K +: K]), .released(released[f*K +: K])
    );
    feedline_input_unit #(.K(K), .PROG_DEPTH(PROG_DEPTH), .KDEPTH(WAVE_DEPTH), .ADC_W(ADC_W), .FB_W(FB_W)) u_fi (
      .clk, .rst_n,
      .cfg_we(cfg_we && cfg_unit >= 6'(Q+f*K) && cfg_unit < 6'(Q+f*K+K)),
      .cfg_unit(cfg_unit - 6'(Q+f*K)), .cfg_bank, .cfg_word, .cfg_data,
      .start(u_start[Q+f*K +: K]), .trig(u_trig[Q+f*K +: K]), .fb_valid(u_fb[Q+f*K +: K]), .fb_vec,
      .adc(adc_data[f]),
      .res_valid(res_valid[f*K +: K]), .res_dtype(res_dtype[f*K +: K]), .res_data(res_data[f*K +: K]),
      .fbk_valid(fbk_valid[f*K +: K]), .fbk_state(fbk_state[f*K +: K]),
      .busy(u_busy[Q+f*K +: K]), .measuring(measuring[f*K +: K])
    );
  end
endmodule
