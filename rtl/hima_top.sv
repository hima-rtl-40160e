// hima_top: the 72-qubit HiMA control system (root controller + 3 QCCSs).
//
// The root controller runs the controller programs of up to N processes,
// staggers their initial triggers, makes all feedback decisions, and sends
// each process's triggers only to the QCCSs in its mask. Each QCCS (leaf
// controller, 8 Z drive boards, 3 XY drive boards, 1 readout board)
// forwards them to the boards in the process's mask, and each board's
// process manager to the units in its mask. Every drive and readout unit
// runs its own qubit's program. A single periodic synchronization pulse,
// generated here, aligns trigger release in every board. A root process
// holds its first (start) trigger until every QCCS in its mask reports all
// its boards of the process started (ready); root_ready shows that state.
//
// Configuration: one write bus (cfg_t, address map in hima_pkg), registered
// once here and once per QCCS. ext_trig is the root's upper-layer trigger
// input (for a further cascade layer, or to gate a process externally).
// Results of every readout input unit come out on meas_* (qubit q of
// QCCS c at index 24c+q).
// Sizes: N = 32 processes and up to 8 QCCSs per root are the paper's
// numbers, 3 QCCSs make the 72-qubit system; memory depths are this
// design's choices.
module hima_top
  import hima_pkg::*;
#(
  parameter int N          = 32,
  parameter int N_QCCS     = 3,
  parameter int NZ         = 8,
  parameter int NXY        = 3,
  parameter int CH         = 8,
  parameter int F          = 4,
  parameter int KQ         = 6,
  parameter int PROG_DEPTH = 1024,
  parameter int WAVE_DEPTH = 2048,
  parameter int ADC_W      = 11,
  parameter int SYNC_PERIOD = 8
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  cfg_t                    cfg,
  input  logic [N-1:0]            ext_trig,
  output logic [15:0]             z_dac  [N_QCCS*NZ*CH],
  output logic [15:0]             xy_dac [N_QCCS*NXY*CH],
  output logic [15:0]             ro_dac [N_QCCS*F],
  input  logic signed [ADC_W-1:0] ro_adc [N_QCCS*F],
  output logic [N_QCCS*F*KQ-1:0]  meas_valid,
  output logic [1:0]              meas_dtype [N_QCCS*F*KQ],
  output logic [31:0]             meas_data  [N_QCCS*F*KQ],
  output logic [N-1:0]            root_busy,
  output logic [N-1:0]            root_ready,
  output logic [N-1:0]            stagger_held,
  output logic [N-1:0]            in_feedback,
  output logic [N_QCCS-1:0]       drive_released
);
  localparam int QC = F * KQ;
  localparam int NQ = N_QCCS * QC;

  logic sync_tick;
  sync_pulse_gen #(.PERIOD(SYNC_PERIOD)) u_sync_gen (.clk, .rst_n, .sync_tick);

  cfg_t cfg_r;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) cfg_r <= '0;
    else        cfg_r <= cfg;
  end

  logic [N-1:0]  c_trig [N_QCCS];
  logic [N-1:0]  c_fbv  [N_QCCS];
  logic [N-1:0]  c_ready [N_QCCS];
  logic [QC-1:0] c_fbd  [N_QCCS];
  logic [NQ-1:0] res_v, res_s, res_v_up, res_s_up;
  logic [15:0]   rejects;

  controller #(.N(N), .K(N_QCCS), .NQ(NQ), .CQ(QC), .SLICE(1'b1), .PROG_DEPTH(PROG_DEPTH)) u_root (
    .clk, .rst_n, .sync_tick,
    .cfg_we(cfg_r.we && !cfg_r.addr[31]), .cfg_unit(addr_unit(cfg_r.addr)),
    .cfg_bank(addr_bank(cfg_r.addr)), .cfg_word(addr_word(cfg_r.addr)), .cfg_data(cfg_r.data),
    .up_trig(ext_trig), .up_fb_valid('0), .up_fb_data('0),
    .res_valid_in(res_v), .res_state_in(res_s), .res_valid_up(res_v_up), .res_state_up(res_s_up),
    .trig_out(c_trig), .fb_valid_out(c_fbv), .fb_data_out(c_fbd),
    .down_ready(c_ready), .ready_up(root_ready),
    .tcp_busy(root_busy), .stagger_held, .in_feedback, .rejects
  );

  for (genvar c = 0; c < N_QCCS; c++) begin : g_qccs
    logic [15:0] zd [NZ*CH];
    logic [15:0] xd [NXY*CH];
    logic [15:0] rd [F];
    logic signed [ADC_W-1:0] ad [F];
    logic [1:0]  mt [QC];
    logic [31:0] md [QC];
    logic [N-1:0] lb;
    for (genvar i = 0; i < NZ*CH; i++)  begin : g_z  assign z_dac[c*NZ*CH + i]  = zd[i]; end
    for (genvar i = 0; i < NXY*CH; i++) begin : g_xy assign xy_dac[c*NXY*CH + i] = xd[i]; end
    for (genvar i = 0; i < F; i++) begin : g_ro
      assign ro_dac[c*F + i] = rd[i];
      assign ad[i]           = ro_adc[c*F + i];
    end
    for (genvar i = 0; i < QC; i++) begin : g_m
      assign meas_dtype[c*QC + i] = mt[i];
      assign meas_data[c*QC + i]  = md[i];
    end
    qccs #(.N(N), .NZ(NZ), .NXY(NXY), .CH(CH), .F(F), .KQ(KQ), .PROG_DEPTH(PROG_DEPTH),
           .WAVE_DEPTH(WAVE_DEPTH), .ADC_W(ADC_W), .QCCS_ID(c)) u_qccs (
      .clk, .rst_n, .sync_tick, .cfg(cfg_r),
      .up_trig(c_trig[c]), .up_fb_valid(c_fbv[c]), .up_fb_data(c_fbd[c]),
      .res_valid_up(res_v[c*QC +: QC]), .res_state_up(res_s[c*QC +: QC]),
      .z_dac(zd), .xy_dac(xd), .ro_dac(rd), .ro_adc(ad),
      .meas_valid(meas_valid[c*QC +: QC]), .meas_dtype(mt), .meas_data(md),
      .leaf_busy(lb), .ready_up(c_ready[c]), .drive_released(drive_released[c])
    );
  end
endmodule
