// tb_qccs: a reduced QCCS (1 Z board, 1 XY board of 2 channels, a readout
// board with one feedline of 2 qubits, 2 processes), feedline looped back.
//  process 0  run by the leaf controller: XY pulse and readout of qubit 0,
//             leaf FEEDBACK decides locally (the result never needs the
//             root), the XY unit branches on the bit and plays a reset pulse;
//             the result is also passed up to the upper layer;
//  process 1  forwarded: a trigger from the upper layer plays a Z pulse.
// Configuration writes addressed to another QCCS must be ignored.
module tb_qccs;
  import hima_pkg::*;
  localparam int N = 2, NZ = 1, NXY = 1, CH = 2, F = 1, KQ = 2, Q = F * KQ;
  localparam int MZ = 0, MXY = 1, MRO = 2;
  logic clk = 0, rst_n = 0, sync_tick = 0;
  cfg_t cfg = '0;
  logic [N-1:0] up_trig = '0, up_fb_valid = '0;
  logic [Q-1:0] up_fb_data = '0, res_valid_up, res_state_up, meas_valid;
  logic [15:0] z_dac [NZ*CH], xy_dac [NXY*CH], ro_dac [F];
  logic signed [10:0] ro_adc [F];
  logic [1:0] meas_dtype [Q];
  logic [31:0] meas_data [Q];
  logic [N-1:0] leaf_busy, ready_up;
  logic drive_released;
  int checks = 0, failures = 0, cyc = 0;

  qccs #(.N(N), .NZ(NZ), .NXY(NXY), .CH(CH), .F(F), .KQ(KQ), .PROG_DEPTH(16),
         .WAVE_DEPTH(64), .ADC_W(11), .QCCS_ID(2)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    sync_tick <= ((cyc + 1) % 8 == 0);
  end
  assign ro_adc[0] = 11'($signed(ro_dac[0]) >>> 4);

  initial begin
    repeat (4000) @(posedge clk);
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

  int n_pulse = 0, n_reset = 0, n_up = 0, n_z = 0, n_wrong = 0;
  always @(posedge clk) if (rst_n) begin
    if (xy_dac[0] == 16'd1000) n_pulse++;
    if (xy_dac[0] == 16'h0777) n_reset++;
    if (res_valid_up[0] && res_state_up[0]) n_up++;
    if (z_dac[0] == 16'd2000) n_z++;
    if (z_dac[0] == 16'd9999) n_wrong++;
  end

  localparam int C = 2;
  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 8; i++) wr(addr_qccs(C, MXY, 0, MEM_WAVE, i), 32'd1000);
    for (int i = 8; i < 16; i++) wr(addr_qccs(C, MXY, 0, MEM_WAVE, i), 32'h0777);
    wr(addr_qccs(C, MXY, 0, MEM_PROG, 0), i_gate(11'd0, 16'd8, 1'b1));
    wr(addr_qccs(C, MXY, 0, MEM_PROG, 1), i_br(8'd0, 16'd2));
    wr(addr_qccs(C, MXY, 0, MEM_PROG, 2), i_gate(11'd8, 16'd8, 1'b0));
    wr(addr_qccs(C, MXY, 0, MEM_PROG, 3), i_stop());
    wr(addr_qccs(C, MXY, 0, MEM_REG, REG_PROG_LEN), 32'd4);
    for (int i = 0; i < 16; i++) wr(addr_qccs(C, MRO, 0, MEM_WAVE, i), 32'd1600);
    wr(addr_qccs(C, MRO, 0, MEM_PROG, 0), i_wait(16'd10, 1'b1));
    wr(addr_qccs(C, MRO, 0, MEM_PROG, 1), i_gate(11'd0, 16'd16, 1'b0));
    wr(addr_qccs(C, MRO, 0, MEM_REG, REG_PROG_LEN), 32'd2);
    for (int i = 0; i < 16; i++) wr(addr_qccs(C, MRO, Q, MEM_WAVE, i), 32'd1);
    wr(addr_qccs(C, MRO, Q, MEM_PROG, 0), i_wait(16'd12, 1'b1));
    wr(addr_qccs(C, MRO, Q, MEM_PROG, 1), i_measure(16'd10, DT_STATE, 1'b1, 1'b0));
    wr(addr_qccs(C, MRO, Q, MEM_REG, REG_PROG_LEN), 32'd2);
    wr(addr_qccs(C, MXY, UNIT_CTRL, MEM_REG, 0), 32'b01);
    wr(addr_qccs(C, MXY, UNIT_CTRL, MEM_START, 0), 0);
    wr(addr_qccs(C, MRO, UNIT_CTRL, MEM_REG, 0), 32'(1 | (1 << Q)));
    wr(addr_qccs(C, MRO, UNIT_CTRL, MEM_START, 0), 0);
    wr(addr_qccs(C, MOD_LEAF, 0, MEM_EMIT, 0), 32'((1 << MXY) | (1 << MRO)));
    wr(addr_qccs(C, MOD_LEAF, 0, MEM_WAVE, 0), 32'h1);
    wr(addr_qccs(C, MOD_LEAF, 0, MEM_WAVE, 7), 32'd0);
    wr(addr_qccs(C, MOD_LEAF, 0, MEM_PROG, 0), i_trigger(1'b1, 1'b0));
    wr(addr_qccs(C, MOD_LEAF, 0, MEM_PROG, 1), i_feedback(16'd0));
    wr(addr_qccs(C, MOD_LEAF, 0, MEM_PROG, 2), i_stop());
    wr(addr_qccs(C, MOD_LEAF, 0, MEM_REG, REG_PROG_LEN), 32'd3);
    // process 1: Z channel 0, forwarded
    for (int i = 0; i < 8; i++) wr(addr_qccs(C, MZ, 0, MEM_WAVE, i), 32'd2000);
    // a write for QCCS 1 must not land here
    for (int i = 0; i < 8; i++) wr(addr_qccs(1, MZ, 0, MEM_WAVE, i), 32'd9999);
    wr(addr_qccs(C, MZ, 0, MEM_PROG, 0), i_gate(11'd0, 16'd8, 1'b1));
    wr(addr_qccs(C, MZ, 0, MEM_REG, REG_PROG_LEN), 32'd1);
    wr(addr_qccs(C, MZ, UNIT_CTRL, MEM_REG, 2), 32'b01);
    wr(addr_qccs(C, MZ, UNIT_CTRL, MEM_START, 1), 0);
    wr(addr_qccs(C, MOD_LEAF, 1, MEM_EMIT, 0), 32'(1 << MZ));

    wr(addr_qccs(C, MOD_LEAF, 0, MEM_START, 0), 0);
    repeat (150) @(negedge clk);
    check(n_pulse == 8, "XY pulse played");
    check(n_up == 1, "qubit 0 result passed up");
    check(n_reset == 8, "leaf feedback made the XY unit play the reset pulse");
    check(!leaf_busy[0], "leaf process finished");
    check(n_z == 0, "process 1 idle so far");
    @(negedge clk); up_trig = 2'b10;
    @(negedge clk); up_trig = '0;
    repeat (60) @(negedge clk);
    check(n_z == 8, "forwarded trigger played the Z pulse");
    check(n_wrong == 0, "configuration for another QCCS ignored");
    check(drive_released == 1'b0, "no trigger pending");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
