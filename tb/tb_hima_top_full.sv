// tb_hima_top_full: the full-size 72-qubit system (hima_top with every
// parameter at its default: 32 processes, 3 QCCSs of 8 Z + 3 XY drive boards
// and a readout board with 4 feedlines of 6 qubits). Feedlines are looped
// back (ADC = DAC / 16).
//  process 5   root-run on the last qubit of QCCS 2 (XY board 10, channel 7;
//              feedline 3, qubit 5): XY pulse, readout, root FEEDBACK, and a
//              feedback-conditioned reset pulse;
//  process 31  external trigger forwarded to Z board 7 channel 7 of every
//              QCCS; the three pulses must start in the same cycle.
module tb_hima_top_full;
  import hima_pkg::*;
  localparam int N = 32, NC = 3, NZ = 8, NXY = 3, CH = 8, F = 4, KQ = 6;
  localparam int QC = F * KQ, NQ = NC * QC;
  localparam int MXY = 10, MRO = 11, MZ = 7;
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

  hima_top dut (.*);
  always #5 clk = ~clk;
  for (genvar i = 0; i < NC * F; i++) begin : g_loop
    assign ro_adc[i] = 11'($signed(ro_dac[i]) >>> 4);
  end

  initial begin
    repeat (3000) @(posedge clk);
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

  localparam int XYI = 2 * NXY * CH + 2 * CH + 7;   // QCCS 2, XY board 2, channel 7
  localparam int QI  = 2 * QC + 23;                  // QCCS 2, readout qubit 23
  int n_pulse = 0, n_reset = 0, n_meas = 0, n_fb = 0;
  int t_z [NC];
  logic [31:0] meas = '0;
  always @(posedge clk) cyc <= cyc + 1;
  always @(posedge clk) if (rst_n) begin
    if (xy_dac[XYI] == 16'd1000) n_pulse++;
    if (xy_dac[XYI] == 16'h0777) n_reset++;
    if (meas_valid[QI]) begin n_meas++; meas = meas_data[QI]; end
    if (in_feedback[5]) n_fb++;
    for (int c = 0; c < NC; c++)
      if (t_z[c] < 0 && z_dac[c * NZ * CH + MZ * CH + 7] == 16'd4000) t_z[c] = cyc;
  end

  initial begin
    for (int c = 0; c < NC; c++) t_z[c] = -1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 8; i++) wr(addr_qccs(2, MXY, 7, MEM_WAVE, i), 32'd1000);
    for (int i = 8; i < 16; i++) wr(addr_qccs(2, MXY, 7, MEM_WAVE, i), 32'h0777);
    wr(addr_qccs(2, MXY, 7, MEM_PROG, 0), i_gate(11'd0, 16'd8, 1'b1));
    wr(addr_qccs(2, MXY, 7, MEM_PROG, 1), i_br(8'd0, 16'd2));
    wr(addr_qccs(2, MXY, 7, MEM_PROG, 2), i_gate(11'd8, 16'd8, 1'b0));
    wr(addr_qccs(2, MXY, 7, MEM_PROG, 3), i_stop());
    wr(addr_qccs(2, MXY, 7, MEM_REG, REG_PROG_LEN), 32'd4);
    wr(addr_qccs(2, MXY, 7, MEM_REG, REG_FB_SEL), 32'd23);
    for (int i = 0; i < 16; i++) wr(addr_qccs(2, MRO, 23, MEM_WAVE, i), 32'd1600);
    wr(addr_qccs(2, MRO, 23, MEM_PROG, 0), i_wait(16'd10, 1'b1));
    wr(addr_qccs(2, MRO, 23, MEM_PROG, 1), i_gate(11'd0, 16'd16, 1'b0));
    wr(addr_qccs(2, MRO, 23, MEM_REG, REG_PROG_LEN), 32'd2);
    for (int i = 0; i < 16; i++) wr(addr_qccs(2, MRO, QC + 23, MEM_WAVE, i), 32'd1);
    wr(addr_qccs(2, MRO, QC + 23, MEM_PROG, 0), i_wait(16'd12, 1'b1));
    wr(addr_qccs(2, MRO, QC + 23, MEM_PROG, 1), i_measure(16'd10, DT_STATE, 1'b1, 1'b0));
    wr(addr_qccs(2, MRO, QC + 23, MEM_REG, REG_PROG_LEN), 32'd2);
    wr(addr_qccs(2, MXY, UNIT_CTRL, MEM_REG, 10), 32'h80);
    wr(addr_qccs(2, MXY, UNIT_CTRL, MEM_START, 5), 0);
    // readout units 23 and 47: mask bits 23 (word 10) and 47 (word 11, bit 15)
    wr(addr_qccs(2, MRO, UNIT_CTRL, MEM_REG, 10), 32'h0080_0000);
    wr(addr_qccs(2, MRO, UNIT_CTRL, MEM_REG, 11), 32'h0000_8000);
    wr(addr_qccs(2, MRO, UNIT_CTRL, MEM_START, 5), 0);
    wr(addr_qccs(2, MOD_LEAF, 5, MEM_EMIT, 0), 32'((1 << MXY) | (1 << MRO)));
    wr(addr_root(5, MEM_EMIT, 0), 32'b100);
    // feedback entry 0: qubit 71 (word 2, bit 7), forward mode
    for (int w = 0; w < 7; w++) wr(addr_root(5, MEM_WAVE, w), w == 2 ? 32'h80 : 32'h0);
    wr(addr_root(5, MEM_WAVE, 7), 32'd0);
    wr(addr_root(5, MEM_PROG, 0), i_trigger(1'b1, 1'b0));
    wr(addr_root(5, MEM_PROG, 1), i_feedback(16'd0));
    wr(addr_root(5, MEM_PROG, 2), i_stop());
    wr(addr_root(5, MEM_REG, REG_PROG_LEN), 32'd3);
    for (int c = 0; c < NC; c++) begin
      for (int i = 0; i < 8; i++) wr(addr_qccs(c, MZ, 7, MEM_WAVE, i), 32'd4000);
      wr(addr_qccs(c, MZ, 7, MEM_PROG, 0), i_gate(11'd0, 16'd8, 1'b1));
      wr(addr_qccs(c, MZ, 7, MEM_REG, REG_PROG_LEN), 32'd1);
      wr(addr_qccs(c, MZ, UNIT_CTRL, MEM_REG, 62), 32'h80);
      wr(addr_qccs(c, MZ, UNIT_CTRL, MEM_START, 31), 0);
      wr(addr_qccs(c, MOD_LEAF, 31, MEM_EMIT, 0), 32'(1 << MZ));
    end
    wr(addr_root(31, MEM_EMIT, 0), 32'b111);

    wr(addr_root(5, MEM_START, 0), 0);
    repeat (150) @(negedge clk);
    check(n_pulse == 8, "XY pulse on the last qubit");
    check(n_meas == 1 && meas == 32'd1, "qubit 71 measured as 1");
    check(n_fb > 0, "root feedback interruption");
    check(n_reset == 8, "feedback-conditioned reset pulse");
    check(!root_busy[5], "process 5 finished");
    @(negedge clk); ext_trig[31] = 1'b1;
    @(negedge clk); ext_trig = '0;
    repeat (60) @(negedge clk);
    check(t_z[0] > 0 && t_z[0] == t_z[1] && t_z[1] == t_z[2], "forwarded trigger reaches all QCCSs in one cycle");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
