// controller: a root, mid-layer or leaf controller of the HiMA hierarchy.
//
// The controller keeps the execution modules of each process in step and
// makes feedback decisions. Inside, after the paper's controller figure:
//  - task scheduler: a start command for process p starts task control
//    processor p (ignored, and counted in `rejects`, while p is busy);
//  - sync unit: triggers from the upper layer are released on the periodic
//    synchronization pulse;
//  - N task control processors, one per process, running WAIT / TRIGGER /
//    FEEDBACK / BR programs;
//  - trigger event arbitration & data transfer with the STI lookup table
//    (staggered triggering, one feedback word per cycle);
//  - emitter with the configuration lookup table (per-process mask of the
//    K downstream ports).
// A process whose task control processor is not running is forwarded: its
// upper-layer triggers and feedback data go straight to the emitter. That is
// how a mid-layer or leaf controller passes the root's triggers down to
// exactly the boards of the process (process-based hierarchical trigger).
// Readout results of feedback-flagged measurements go up one register per
// layer; only a controller running a FEEDBACK decides.
//
// Configuration (cfg_* already addressed here; cfg_unit = process p):
//   MEM_PROG  program of TCP p        MEM_WAVE  feedback entry table of TCP p
//   MEM_REG   word 0 prog_len, word 1 loops of TCP p
//   MEM_STI   STI[p] (cycles)         MEM_EMIT  downstream-port mask of p
//   MEM_START start TCP p
// Readiness: a process is ready when every port in its emitter mask reports
// it ready; the task control processor holds a start = 1 TRIGGER until then,
// and ready_up (one register later) reports it to the upper layer.
// Timing: upper trigger -> sync pulse -> +1 -> emitter +1 -> ports; TCP
// trigger -> emitter +1 -> ports.
module controller
  import hima_pkg::*;
#(
  parameter int N          = 32,
  parameter int K          = 3,
  parameter int NQ         = 72,
  parameter int CQ         = 24,
  parameter bit SLICE      = 1'b1,
  parameter int PROG_DEPTH = 1024,
  parameter int FB_ENTRIES = 16
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          sync_tick,
  input  logic          cfg_we,
  input  logic [5:0]    cfg_unit,
  input  logic [2:0]    cfg_bank,
  input  logic [13:0]   cfg_word,
  input  logic [31:0]   cfg_data,
  // from the upper layer
  input  logic [N-1:0]  up_trig,
  input  logic [N-1:0]  up_fb_valid,
  input  logic [NQ-1:0] up_fb_data,
  // readout results from below, and on to the upper layer
  input  logic [NQ-1:0] res_valid_in,
  input  logic [NQ-1:0] res_state_in,
  output logic [NQ-1:0] res_valid_up,
  output logic [NQ-1:0] res_state_up,
  // to the K downstream ports
  output logic [N-1:0]  trig_out     [K],
  output logic [N-1:0]  fb_valid_out [K],
  output logic [CQ-1:0] fb_data_out  [K],
  // readiness of the process from each port, and on to the upper layer
  input  logic [N-1:0]  down_ready   [K],
  output logic [N-1:0]  ready_up,
  // status
  output logic [N-1:0]  tcp_busy,
  output logic [N-1:0]  stagger_held,
  output logic [N-1:0]  in_feedback,
  output logic [15:0]   rejects
);
  localparam int PW = $clog2(N);

  logic [N-1:0] up_trig_s;
  sync_unit #(.N(N)) u_sync (.clk, .rst_n, .sync_tick, .trig_in(up_trig), .trig_out(up_trig_s));

  // Task scheduler.
  logic [N-1:0] start;
  logic         start_cmd;
  assign start_cmd = cfg_we && cfg_bank == MEM_START && cfg_unit < 6'(N);
  always_comb begin
    start = '0;
    if (start_cmd && !tcp_busy[cfg_unit[PW-1:0]]) start[cfg_unit[PW-1:0]] = 1'b1;
  end
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rejects <= '0;
    else if (start_cmd && tcp_busy[cfg_unit[PW-1:0]]) rejects <= rejects + 1'b1;
  end

  logic [N-1:0]  ready;
  logic [N-1:0]  t_req, t_start, t_ack, fb_req, fb_ack, core_run;
  logic [31:0]   core_cnt [N];
  logic [NQ-1:0] tcp_fb [N];
  logic [15:0]   prog_len [N];
  logic [15:0]   loops [N];

  for (genvar p = 0; p < N; p++) begin : g_tcp
    logic sel;
    assign sel = cfg_we && cfg_unit == 6'(p);
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        prog_len[p] <= '0;
        loops[p]    <= 16'd1;
      end else if (sel && cfg_bank == MEM_REG) begin
        if (cfg_word == REG_PROG_LEN) prog_len[p] <= cfg_data[15:0];
        if (cfg_word == REG_LOOPS)    loops[p]    <= cfg_data[15:0];
      end
    end
    task_control_processor #(.PROG_DEPTH(PROG_DEPTH), .FB_ENTRIES(FB_ENTRIES), .NQ(NQ)) u_tcp (
      .clk, .rst_n,
      .prog_we(sel && cfg_bank == MEM_PROG), .prog_waddr(cfg_word[$clog2(PROG_DEPTH)-1:0]),
      .prog_wdata(cfg_data),
      .fbt_we(sel && cfg_bank == MEM_WAVE), .fbt_waddr(cfg_word[$clog2(FB_ENTRIES*8)-1:0]),
      .fbt_wdata(cfg_data),
      .prog_len(prog_len[p]), .loops(loops[p]),
      .start(start[p]), .busy(tcp_busy[p]), .up_trig(up_trig_s[p]),
      .trig_req(t_req[p]), .trig_start(t_start[p]), .trig_ack(t_ack[p]),
      .core_cnt(core_cnt[p]), .core_run(core_run[p]),
      .res_valid(res_valid_in), .res_state(res_state_in),
      .fb_req(fb_req[p]), .fb_data(tcp_fb[p]), .fb_ack(fb_ack[p]),
      .in_feedback(in_feedback[p]), .ready(ready[p])
    );
  end

  logic [N-1:0]  arb_trig, arb_fb_valid;
  logic [NQ-1:0] arb_fb_data;

  trigger_arbiter #(.N(N), .NQ(NQ)) u_arb (
    .clk, .rst_n,
    .sti_we(cfg_we && cfg_bank == MEM_STI && cfg_unit < 6'(N)), .sti_waddr(cfg_unit[PW-1:0]),
    .sti_wdata(cfg_data),
    .req(t_req), .req_start(t_start), .core_cnt, .core_run,
    .ack(t_ack), .trig_out(arb_trig), .held(stagger_held),
    .fb_req, .fb_data_in(tcp_fb), .fb_ack, .fb_valid(arb_fb_valid), .fb_data(arb_fb_data)
  );

  // Forwarding of processes this controller does not run itself.
  logic [N-1:0]  e_trig, e_fb_valid, fwd_fb;
  logic [NQ-1:0] e_fb_data;
  assign fwd_fb     = up_fb_valid & ~tcp_busy;
  assign e_trig     = arb_trig | (up_trig_s & ~tcp_busy);
  assign e_fb_valid = arb_fb_valid | fwd_fb;
  assign e_fb_data  = (|arb_fb_valid) ? arb_fb_data : up_fb_data;

  emitter #(.N(N), .K(K), .NQ(NQ), .CQ(CQ), .SLICE(SLICE)) u_emit (
    .clk, .rst_n,
    .lut_we(cfg_we && cfg_bank == MEM_EMIT && cfg_unit < 6'(N)), .lut_waddr(cfg_unit[PW-1:0]),
    .lut_wdata(cfg_data),
    .trig(e_trig), .fb_valid(e_fb_valid), .fb_data(e_fb_data),
    .trig_out, .fb_valid_out, .fb_data_out, .port_ready(down_ready), .ready
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      res_valid_up <= '0;
      res_state_up <= '0;
      ready_up     <= '0;
    end else begin
      res_valid_up <= res_valid_in;
      res_state_up <= res_state_in;
      ready_up     <= ready;
    end
  end

  a_fb_collision: assert property (@(posedge clk) disable iff (!rst_n) !((|arb_fb_valid) && (|fwd_fb)));
endmodule
