// qccs: qubit cluster control subsystem (one chassis, 24 qubits).
//
// A leaf controller and the execution boards it serves: 8 Z drive boards,
// 3 XY drive boards and 1 readout board, the paper's configuration for 24
// tunable-coupler qubits (8 channels per drive board, 4 feedlines of 6
// qubits on the readout board). The leaf controller forwards the root's
// per-process triggers and feedback to exactly the boards in the process's
// mask, or runs a process itself when the process stays inside this QCCS.
//
// Module numbering on the configuration bus and in the leaf's emitter mask
// (this design's): 0..7 Z drive boards, 8..10 XY drive boards, 11 readout
// board, 15 the leaf controller. The configuration bus is registered once
// on entry. Feedback data inside the QCCS is the 24-bit word of its qubits
// (bit q = readout qubit q of the readout board). ready_up tells the root,
// per process, that every board of the process in this QCCS has been started
// and waits for its first trigger.
module qccs
  import hima_pkg::*;
#(
  parameter int N          = 32,
  parameter int NZ         = 8,
  parameter int NXY        = 3,
  parameter int CH         = 8,
  parameter int F          = 4,
  parameter int KQ         = 6,
  parameter int PROG_DEPTH = 1024,
  parameter int WAVE_DEPTH = 2048,
  parameter int ADC_W      = 11,
  parameter int QCCS_ID  = 0
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    sync_tick,
  input  cfg_t                    cfg,
  input  logic [N-1:0]            up_trig,
  input  logic [N-1:0]            up_fb_valid,
  input  logic [F*KQ-1:0]         up_fb_data,
  output logic [F*KQ-1:0]         res_valid_up,
  output logic [F*KQ-1:0]         res_state_up,
  output logic [15:0]             z_dac  [NZ*CH],
  output logic [15:0]             xy_dac [NXY*CH],
  output logic [15:0]             ro_dac [F],
  input  logic signed [ADC_W-1:0] ro_adc [F],
  output logic [F*KQ-1:0]         meas_valid,
  output logic [1:0]              meas_dtype [F*KQ],
  output logic [31:0]             meas_data  [F*KQ],
  output logic [N-1:0]            leaf_busy,
  output logic [N-1:0]            ready_up,
  output logic                    drive_released
);
  localparam int Q   = F * KQ;
  localparam int NM  = NZ + NXY + 1;
  localparam int RO  = NZ + NXY;

  cfg_t cfg_r;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) cfg_r <= '0;
    else        cfg_r <= cfg;
  end

  logic       here;
  logic [3:0] mod;
  assign here = cfg_r.we && cfg_r.addr[31] && cfg_r.addr[30:27] == 4'(QCCS_ID);
  assign mod  = cfg_r.addr[26:23];

  logic [N-1:0] m_trig [NM];
  logic [N-1:0] m_fbv  [NM];
  logic [N-1:0] m_ready [NM];
  logic [Q-1:0] m_fbd  [NM];
  logic [Q-1:0] fbk_valid, fbk_state, measuring;
  logic [N-1:0] held, in_fb, ro_busy;
  logic [15:0]  rejects;

  controller #(.N(N), .K(NM), .NQ(Q), .CQ(Q), .SLICE(1'b0), .PROG_DEPTH(PROG_DEPTH)) u_leaf (
    .clk, .rst_n, .sync_tick,
    .cfg_we(here && mod == 4'(MOD_LEAF)), .cfg_unit(addr_unit(cfg_r.addr)),
    .cfg_bank(addr_bank(cfg_r.addr)), .cfg_word(addr_word(cfg_r.addr)), .cfg_data(cfg_r.data),
    .up_trig, .up_fb_valid, .up_fb_data,
    .res_valid_in(fbk_valid), .res_state_in(fbk_state),
    .res_valid_up, .res_state_up,
    .trig_out(m_trig), .fb_valid_out(m_fbv), .fb_data_out(m_fbd),
    .down_ready(m_ready), .ready_up,
    .tcp_busy(leaf_busy), .stagger_held(held), .in_feedback(in_fb), .rejects
  );

  logic [CH-1:0] rel [NZ+NXY];
  logic [CH-1:0] ubusy [NZ+NXY];
  logic [N-1:0]  pbusy [NZ+NXY];

  for (genvar m = 0; m < NZ + NXY; m++) begin : g_drv
    logic [15:0] dac [CH];
    drive_module #(.N(N), .M(CH), .PROG_DEPTH(PROG_DEPTH), .WAVE_DEPTH(WAVE_DEPTH), .FB_W(Q)) u_drv (
      .clk, .rst_n, .sync_tick,
      .cfg_we(here && mod == 4'(m)), .cfg_unit(addr_unit(cfg_r.addr)),
      .cfg_bank(addr_bank(cfg_r.addr)), .cfg_word(addr_word(cfg_r.addr)), .cfg_data(cfg_r.data),
      .trig_in(m_trig[m]), .fb_valid_in(m_fbv[m]), .fb_vec(m_fbd[m]),
      .dac_data(dac), .released(rel[m]), .unit_busy(ubusy[m]), .proc_busy(pbusy[m]),
      .proc_ready(m_ready[m])
    );
    for (genvar c = 0; c < CH; c++) begin : g_ch
      if (m < NZ) begin : g_z
        assign z_dac[m*CH + c] = dac[c];
      end else begin : g_xy
        assign xy_dac[(m-NZ)*CH + c] = dac[c];
      end
    end
  end

  always_comb begin
    drive_released = 1'b0;
    for (int m = 0; m < NZ + NXY; m++) drive_released |= |rel[m];
  end

  readout_module #(.N(N), .F(F), .K(KQ), .PROG_DEPTH(PROG_DEPTH), .WAVE_DEPTH(WAVE_DEPTH),
                   .ADC_W(ADC_W), .FB_W(Q)) u_ro (
    .clk, .rst_n, .sync_tick,
    .cfg_we(here && mod == 4'(RO)), .cfg_unit(addr_unit(cfg_r.addr)),
    .cfg_bank(addr_bank(cfg_r.addr)), .cfg_word(addr_word(cfg_r.addr)), .cfg_data(cfg_r.data),
    .trig_in(m_trig[RO]), .fb_valid_in(m_fbv[RO]), .fb_vec(m_fbd[RO]),
    .dac_data(ro_dac), .adc_data(ro_adc),
    .res_valid(meas_valid), .res_dtype(meas_dtype), .res_data(meas_data),
    .fbk_valid, .fbk_state, .measuring, .proc_busy(ro_busy),
    .proc_ready(m_ready[RO])
  );
endmodule
