// tb_hima_top: end-to-end run of a reduced HiMA system (root controller,
// two QCCSs, each with one Z board, one XY board of 2 channels and a
// readout board with one feedline of 2 qubits; 4 processes). Feedlines are
// looped back (ADC = DAC / 16), standing in for the readout resonators.
//
//  process 0  root-run, QCCS 0: XY pulse on qubit 0, readout of qubit 0,
//             root FEEDBACK (forward mode), conditional reset pulse on the
//             XY channel (active reset, BR on the feedback bit);
//  process 1  root-run, QCCS 1: Z pulse, initial trigger staggered by
//             STI = 40 cycles behind process 0; its Z board is started
//             late, so the root first waits for the board to be ready;
//  process 2  leaf-run inside QCCS 1: the leaf controller itself triggers an
//             XY pulse (the root is not involved);
//  process 3  not run by any controller: an external trigger at the root is
//             forwarded through both leaf controllers to a Z channel of each
//             QCCS, which must start in the same cycle.
// Each mechanism is counted; a mechanism that never happens is a failure.
module tb_hima_top;
  import hima_pkg::*;
  localparam int N = 4, NC = 2, NZ = 1, NXY = 1, CH = 2, F = 1, KQ = 2;
  localparam int QC = F * KQ, NQ = NC * QC;
  localparam int MZ = 0, MXY = 1, MRO = 2;
  logic clk = 0, rst_n = 0;
  cfg_t cfg = '0;
  logic [N-1:0] ext_trig = '0;
  logic [15:0] z_dac [NC*NZ*CH];
  logic [15:0] xy_dac [NC*NXY*CH];
  logic [15:0] ro_dac [NC*F];
  logic signed [10:0] ro_adc [NC*F];
  logic [NQ-1:0] meas_valid;
  logic [1:0] meas_dtype [NQ];
  logic [31:0] meas_data [NQ];
  logic [N-1:0] root_busy, root_ready, stagger_held, in_feedback;
  logic [NC-1:0] drive_released;
  int checks = 0, failures = 0, cyc = 0;

  hima_top #(.N(N), .N_QCCS(NC), .NZ(NZ), .NXY(NXY), .CH(CH), .F(F), .KQ(KQ),
             .PROG_DEPTH(16), .WAVE_DEPTH(64), .ADC_W(11), .SYNC_PERIOD(8)) dut (.*);
  always #5 clk = ~clk;
  for (genvar i = 0; i < NC * F; i++) begin : g_loop
    assign ro_adc[i] = 11'($signed(ro_dac[i]) >>> 4);
  end

  initial begin
    repeat (6000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input logic c, input string m);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", m); end
  endtask
  task automatic wr(input logic [31:0] a, input logic [31:0] d);
    @(negedge clk); cfg.we = 1; cfg.addr = a; cfg.data = d;
    @(negedge clk); cfg.we = 0;
  endtask

  // mechanism counters and event times
  int n_sync = 0, n_stagger = 0, n_fb = 0, n_reset = 0, n_hold = 0, n_release = 0;
  int n_meas = 0, n_leaf = 0, n_fwd = 0, n_ready_wait = 0;
  int t_xy0 = -1, t_z2 = -1, t_z1 = -1, t_z3 = -1, t_reset = -1;
  logic [31:0] meas0 = '0;
  always @(posedge clk) cyc <= cyc + 1;
  always @(posedge clk) if (rst_n) begin
    if (dut.sync_tick) n_sync++;
    if (stagger_held[1]) n_stagger++;
    if (root_busy[1] && !root_ready[1]) n_ready_wait++;
    if (in_feedback[0]) n_fb++;
    if (dut.g_qccs[0].u_qccs.g_drv[MXY].u_drv.g_qdu[0].u_qdu.holding) n_hold++;
    if (|drive_released) n_release++;
    if (meas_valid[0]) begin n_meas++; meas0 = meas_data[0]; end
    if (t_xy0 < 0 && xy_dac[0] == 16'd1000) t_xy0 = cyc;
    if (t_reset < 0 && xy_dac[0] == 16'h0777) begin t_reset = cyc; n_reset++; end
    if (t_z2 < 0 && z_dac[2] == 16'd2000) t_z2 = cyc;
    if (xy_dac[3] == 16'd3000) n_leaf++;
    if (t_z1 < 0 && z_dac[1] == 16'd4000) t_z1 = cyc;
    if (t_z3 < 0 && z_dac[3] == 16'd4000) t_z3 = cyc;
    if (z_dac[1] == 16'd4000 && z_dac[3] == 16'd4000) n_fwd++;
  end

  // unit program: one triggered GATE of 8 samples of value v at LUT address 0
  task automatic drive_gate(input int c, input int m, input int u, input logic [15:0] v);
    for (int i = 0; i < 8; i++) wr(addr_qccs(c, m, u, MEM_WAVE, i), 32'(v));
    wr(addr_qccs(c, m, u, MEM_PROG, 0), i_gate(11'd0, 16'd8, 1'b1));
    wr(addr_qccs(c, m, u, MEM_PROG, 1), i_stop());
    wr(addr_qccs(c, m, u, MEM_REG, REG_PROG_LEN), 32'd2);
  endtask
  task automatic module_proc(input int c, input int m, input int p, input logic [31:0] umask);
    wr(addr_qccs(c, m, UNIT_CTRL, MEM_REG, 2 * p), umask);
    wr(addr_qccs(c, m, UNIT_CTRL, MEM_START, p), 0);
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    // ---------------- process 0 (QCCS 0, qubit 0) ----------------
    for (int i = 0; i < 8; i++) wr(addr_qccs(0, MXY, 0, MEM_WAVE, i), 32'd1000);
    for (int i = 8; i < 16; i++) wr(addr_qccs(0, MXY, 0, MEM_WAVE, i), 32'h0777);
    wr(addr_qccs(0, MXY, 0, MEM_PROG, 0), i_gate(11'd0, 16'd8, 1'b1));
    wr(addr_qccs(0, MXY, 0, MEM_PROG, 1), i_br(8'd0, 16'd2));
    wr(addr_qccs(0, MXY, 0, MEM_PROG, 2), i_gate(11'd8, 16'd8, 1'b0));
    wr(addr_qccs(0, MXY, 0, MEM_PROG, 3), i_stop());
    wr(addr_qccs(0, MXY, 0, MEM_REG, REG_PROG_LEN), 32'd4);
    wr(addr_qccs(0, MXY, 0, MEM_REG, REG_FB_SEL), 32'd0);
    wr(addr_qccs(0, MXY, 0, MEM_REG, REG_IDLE), 32'd5);
    // readout output unit 0 and input unit 0 (unit index QC + 0)
    for (int i = 0; i < 16; i++) wr(addr_qccs(0, MRO, 0, MEM_WAVE, i), 32'd1600);
    wr(addr_qccs(0, MRO, 0, MEM_PROG, 0), i_wait(16'd10, 1'b1));
    wr(addr_qccs(0, MRO, 0, MEM_PROG, 1), i_gate(11'd0, 16'd16, 1'b0));
    wr(addr_qccs(0, MRO, 0, MEM_REG, REG_PROG_LEN), 32'd2);
    for (int i = 0; i < 16; i++) wr(addr_qccs(0, MRO, QC, MEM_WAVE, i), 32'd1);
    wr(addr_qccs(0, MRO, QC, MEM_PROG, 0), i_wait(16'd12, 1'b1));
    wr(addr_qccs(0, MRO, QC, MEM_PROG, 1), i_measure(16'd10, DT_STATE, 1'b1, 1'b0));
    wr(addr_qccs(0, MRO, QC, MEM_REG, REG_PROG_LEN), 32'd2);
    module_proc(0, MXY, 0, 32'b01);
    module_proc(0, MRO, 0, 32'(1 | (1 << QC)));
    wr(addr_qccs(0, MOD_LEAF, 0, MEM_EMIT, 0), 32'((1 << MXY) | (1 << MRO)));
    // root: initial trigger, feedback on qubit 0 (forward), then wait
    wr(addr_root(0, MEM_EMIT, 0), 32'b01);
    wr(addr_root(0, MEM_WAVE, 0), 32'h1);
    wr(addr_root(0, MEM_WAVE, 7), 32'd0);
    wr(addr_root(0, MEM_PROG, 0), i_trigger(1'b1, 1'b0));
    wr(addr_root(0, MEM_PROG, 1), i_feedback(16'd0));
    wr(addr_root(0, MEM_PROG, 2), i_wait(16'd150, 1'b0));
    wr(addr_root(0, MEM_PROG, 3), i_stop());
    wr(addr_root(0, MEM_REG, REG_PROG_LEN), 32'd4);
    // ---------------- process 1 (QCCS 1, Z channel 0) ----------------
    drive_gate(1, MZ, 0, 16'd2000);
    wr(addr_qccs(1, MZ, UNIT_CTRL, MEM_REG, 2), 32'b01);
    wr(addr_qccs(1, MOD_LEAF, 1, MEM_EMIT, 0), 32'(1 << MZ));
    wr(addr_root(1, MEM_EMIT, 0), 32'b10);
    wr(addr_root(1, MEM_STI, 0), 32'd40);
    wr(addr_root(1, MEM_PROG, 0), i_trigger(1'b1, 1'b0));
    wr(addr_root(1, MEM_PROG, 1), i_stop());
    wr(addr_root(1, MEM_REG, REG_PROG_LEN), 32'd2);
    // ---------------- process 2 (leaf-run in QCCS 1, XY channel 1) ----------------
    drive_gate(1, MXY, 1, 16'd3000);
    module_proc(1, MXY, 2, 32'b10);
    wr(addr_qccs(1, MOD_LEAF, 2, MEM_EMIT, 0), 32'(1 << MXY));
    wr(addr_qccs(1, MOD_LEAF, 2, MEM_PROG, 0), i_trigger(1'b1, 1'b0));
    wr(addr_qccs(1, MOD_LEAF, 2, MEM_PROG, 1), i_stop());
    wr(addr_qccs(1, MOD_LEAF, 2, MEM_REG, REG_PROG_LEN), 32'd2);
    // ---------------- process 3 (external trigger, Z channel 1 of both QCCSs) ----------------
    for (int c = 0; c < NC; c++) begin
      drive_gate(c, MZ, 1, 16'd4000);
      module_proc(c, MZ, 3, 32'b10);
      wr(addr_qccs(c, MOD_LEAF, 3, MEM_EMIT, 0), 32'(1 << MZ));
    end
    wr(addr_root(3, MEM_EMIT, 0), 32'b11);

    repeat (10) @(negedge clk);
    check(xy_dac[0] == 16'd5, "XY channel holds its IDLE value before the trigger");
    check(z_dac[2] == 16'd0 && xy_dac[3] == 16'd0, "nothing plays before a trigger");
    // start root processes 0 and 1 back to back
    wr(addr_root(0, MEM_START, 0), 0);
    wr(addr_root(1, MEM_START, 0), 0);
    // the Z board of process 1 is started only now: the root holds the start
    // trigger of process 1 until QCCS 1 reports the board ready
    repeat (15) @(negedge clk);
    check(!root_ready[1], "process 1 not ready before its board is started");
    wr(addr_qccs(1, MZ, UNIT_CTRL, MEM_START, 1), 0);
    repeat (185) @(negedge clk);
    check(t_xy0 > 0, "process 0 pulse played");
    check(t_z2 > 0, "process 1 pulse played");
    check(t_z2 - t_xy0 >= 40 && t_z2 - t_xy0 <= 40 + 16, "process 1 staggered behind process 0 by STI");
    check(n_meas == 1 && meas0 == 32'd1, "qubit 0 measured as 1");
    check(t_reset > t_xy0 + 8, "conditional reset pulse played after the measurement");
    check(xy_dac[1] == 16'd0 && z_dac[0] == 16'd0 && z_dac[3] == 16'd0, "other channels untouched");
    // leaf-run process 2
    wr(addr_qccs(1, MOD_LEAF, 2, MEM_START, 0), 0);
    repeat (60) @(negedge clk);
    check(n_leaf == 8, "leaf-run process pulse (8 samples)");
    check(!root_busy[2], "root not involved in process 2");
    // forwarded external trigger, process 3
    @(negedge clk); ext_trig = 4'b1000;
    @(negedge clk); ext_trig = '0;
    repeat (60) @(negedge clk);
    check(t_z1 > 0 && t_z1 == t_z3, "forwarded trigger starts both QCCSs in the same cycle");
    check(n_fwd == 8, "both forwarded pulses played in full");
    repeat (150) @(negedge clk);
    check(root_busy == '0, "all root processes finished");

    $display("mechanisms: sync=%0d stagger_hold=%0d feedback=%0d reset_pulse=%0d switch_hold=%0d release=%0d meas=%0d leaf=%0d fwd=%0d ready_wait=%0d",
             n_sync, n_stagger, n_fb, n_reset, n_hold, n_release, n_meas, n_leaf, n_fwd, n_ready_wait);
    check(n_sync > 0, "mechanism: sync pulse");
    check(n_ready_wait > 0, "mechanism: root waits for readiness");
    check(n_stagger > 0, "mechanism: staggered trigger hold");
    check(n_fb > 0, "mechanism: root feedback interruption");
    check(n_reset > 0, "mechanism: feedback-conditioned branch");
    check(n_hold > 0, "mechanism: output switch hold");
    check(n_release > 0, "mechanism: trigger release at the switch");
    check(n_meas > 0, "mechanism: readout discrimination");
    check(n_leaf > 0, "mechanism: leaf-level process");
    check(n_fwd > 0, "mechanism: hierarchical forwarding");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
