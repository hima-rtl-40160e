// exec_module_ctrl: the process-handling front of an execution module.
//
// Shared by the drive modules and the readout module: the sync unit that
// aligns incoming per-process triggers to the periodic synchronization
// pulse, one process manager per process (unit masks), and the dispatcher
// that relays starts, triggers and feedback strobes to the module's units.
// This is the paper's drive-module organisation (sync unit, process
// managers, dispatcher); factoring it out for reuse is this design's choice.
//
// Configuration (cfg_* already addressed to this module, unit index 63):
// bank MEM_REG word 2p / 2p+1 = low / high 32 bits of process p's unit mask;
// bank MEM_START word p = start process p on its units.
// proc_ready[p]: all units of process p are active (see process_manager).
// Timing: trigger to unit strobe = sync wait + 1 (sync unit) + 1 (dispatcher).
module exec_module_ctrl
  import hima_pkg::*;
#(
  parameter int N = 32,
  parameter int M = 8
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         sync_tick,
  input  logic         cfg_we,
  input  logic [2:0]   cfg_bank,
  input  logic [13:0]  cfg_word,
  input  logic [31:0]  cfg_data,
  input  logic [N-1:0] trig_in,
  input  logic [N-1:0] fb_valid_in,
  input  logic [M-1:0] unit_busy,
  output logic [M-1:0] unit_start,
  output logic [M-1:0] unit_trig,
  output logic [M-1:0] unit_fb,
  output logic [N-1:0] proc_busy,
  output logic [N-1:0] proc_ready
);
  logic [N-1:0] trig_s;
  logic [M-1:0] pm_start [N];
  logic [M-1:0] pm_trig  [N];
  logic [M-1:0] pm_fb    [N];
  logic [M-1:0] pm_mask  [N];
  logic         conflict;

  sync_unit #(.N(N)) u_sync (.clk, .rst_n, .sync_tick, .trig_in, .trig_out(trig_s));

  for (genvar p = 0; p < N; p++) begin : g_pm
    logic [63:0] wmask;
    always_comb begin
      wmask = 64'(pm_mask[p]);
      if (cfg_word[0]) wmask[63:32] = cfg_data;
      else             wmask[31:0]  = cfg_data;
    end
    process_manager #(.M(M)) u_pm (
      .clk, .rst_n,
      .mask_we   (cfg_we && cfg_bank == MEM_REG && cfg_word[13:1] == 13'(p)),
      .mask_wdata(wmask[M-1:0]),
      .mask      (pm_mask[p]),
      .start     (cfg_we && cfg_bank == MEM_START && cfg_word == 14'(p)),
      .trig      (trig_s[p]),
      .fb_valid  (fb_valid_in[p]),
      .unit_busy,
      .unit_start(pm_start[p]), .unit_trig(pm_trig[p]), .unit_fb(pm_fb[p]),
      .busy      (proc_busy[p]),
      .ready     (proc_ready[p])
    );
  end

  dispatcher #(.N(N), .M(M)) u_disp (
    .clk, .rst_n, .pm_start, .pm_trig, .pm_fb, .unit_start, .unit_trig, .unit_fb, .conflict
  );
endmodule
