// drive_module: an XY or Z drive module (one drive board).
//
// M qubit drive units, each with its own DAC channel, behind the module's
// process front end (sync unit, one process manager per process,
// dispatcher). Triggers arrive from the leaf controller one bit per process;
// the process managers turn them into triggers for exactly the units each
// process owns. The paper's boards carry 8 drive channels (8 XY modules per
// XY board, 8 Z modules per Z board), hence M = 8.
//
// Configuration (cfg_* already addressed to this module): cfg_unit 0..M-1 =
// a drive unit (see qubit_drive_unit), 63 = the process masks and starts
// (see exec_module_ctrl). fb_vec is the QCCS-wide feedback word; each unit
// picks its bit. proc_busy / proc_ready per process: some unit still runs /
// every unit of the process has been started (armed), for the leaf's
// readiness report.
// Timing: trigger in -> sync pulse -> +2 cycles to the unit -> +1 to DAC.
module drive_module
  import hima_pkg::*;
#(
  parameter int N          = 32,
  parameter int M          = 8,
  parameter int PROG_DEPTH = 1024,
  parameter int WAVE_DEPTH = 2048,
  parameter int FB_W       = 24
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            sync_tick,
  input  logic            cfg_we,
  input  logic [5:0]      cfg_unit,
  input  logic [2:0]      cfg_bank,
  input  logic [13:0]     cfg_word,
  input  logic [31:0]     cfg_data,
  input  logic [N-1:0]    trig_in,
  input  logic [N-1:0]    fb_valid_in,
  input  logic [FB_W-1:0] fb_vec,
  output logic [15:0]     dac_data [M],
  output logic [M-1:0]    released,
  output logic [M-1:0]    unit_busy,
  output logic [N-1:0]    proc_busy,
  output logic [N-1:0]    proc_ready
);
  logic [M-1:0] u_start, u_trig, u_fb, played, br_wait;

  exec_module_ctrl #(.N(N), .M(M)) u_ctrl (
    .clk, .rst_n, .sync_tick,
    .cfg_we(cfg_we && cfg_unit == 6'(UNIT_CTRL)), .cfg_bank, .cfg_word, .cfg_data,
    .trig_in, .fb_valid_in, .unit_busy,
    .unit_start(u_start), .unit_trig(u_trig), .unit_fb(u_fb), .proc_busy, .proc_ready
  );

  for (genvar m = 0; m < M; m++) begin : g_qdu
    qubit_drive_unit #(.PROG_DEPTH(PROG_DEPTH), .WAVE_DEPTH(WAVE_DEPTH), .FB_W(FB_W)) u_qdu (
      .clk, .rst_n,
      .cfg_we(cfg_we && cfg_unit == 6'(m)), .cfg_bank, .cfg_word, .cfg_data,
      .start(u_start[m]), .trig(u_trig[m]), .fb_valid(u_fb[m]), .fb_vec,
      .dac_data(dac_data[m]), .played(played[m]), .released(released[m]),
      .busy(unit_busy[m]), .br_wait(br_wait[m])
    );
  end
endmodule
