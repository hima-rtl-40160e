// tb_readout_module: one feedline with two qubits, looped back (the ADC
// sees the feedline DAC stream scaled down, as through a readout cavity).
// Process 0 owns qubit 0's output and input units, process 1 qubit 1's.
// Each process's trigger must play only its own readout pulse and return
// its own qubit's state, including the feedback-flagged state bit.
module tb_readout_module;
  import hima_pkg::*;
  localparam int N = 2, F = 1, K = 2, Q = F * K;
  logic clk = 0, rst_n = 0, sync_tick = 0;
  logic cfg_we = 0;
  logic [5:0] cfg_unit = '0;
  logic [2:0] cfg_bank = '0;
  logic [13:0] cfg_word = '0;
  logic [31:0] cfg_data = '0;
  logic [N-1:0] trig_in = '0, fb_valid_in = '0, proc_busy, proc_ready;
  logic [Q-1:0] fb_vec = '0;
  logic [15:0] dac_data [F];
  logic signed [10:0] adc_data [F];
  logic [Q-1:0] res_valid, fbk_valid, fbk_state, measuring;
  logic [1:0] res_dtype [Q];
  logic [31:0] res_data [Q];
  int checks = 0, failures = 0;
  int cyc = 0;

  readout_module #(.N(N), .F(F), .K(K), .PROG_DEPTH(16), .WAVE_DEPTH(64), .ADC_W(11), .FB_W(Q)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    sync_tick <= ((cyc + 1) % 4 == 0);
  end
  assign adc_data[0] = 11'($signed(dac_data[0]) >>> 4);

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input logic c, input string m);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", m); end
  endtask

  task automatic wr(input int u, input logic [2:0] b, input int w, input logic [31:0] d);
    @(negedge clk); cfg_we = 1; cfg_unit = 6'(u); cfg_bank = b; cfg_word = 14'(w); cfg_data = d;
    @(negedge clk); cfg_we = 0;
  endtask

  logic [31:0] got [Q];
  logic [Q-1:0] got_v = '0, got_fb = '0, got_fbs = '0;
  always @(posedge clk)
    for (int q = 0; q < Q; q++) begin
      if (res_valid[q]) begin got[q] <= res_data[q]; got_v[q] <= 1'b1; end
      if (fbk_valid[q]) begin got_fb[q] <= 1'b1; got_fbs[q] <= fbk_state[q]; end
    end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    // qubit 0 pulse +1600, qubit 1 pulse -1600; kernel +1; threshold 0
    for (int q = 0; q < Q; q++) begin
      for (int i = 0; i < 16; i++) wr(q, MEM_WAVE, i, q == 0 ? 32'd1600 : 32'hffff_f9c0);
      wr(q, MEM_PROG, 0, i_gate(11'd0, 16'd16, 1'b1));
      wr(q, MEM_REG, REG_PROG_LEN, 32'd1);
      for (int i = 0; i < 16; i++) wr(Q + q, MEM_WAVE, i, 32'd1);
      wr(Q + q, MEM_PROG, 0, i_wait(16'd2, 1'b1));
      wr(Q + q, MEM_PROG, 1, i_measure(16'd10, DT_STATE, 1'b1, 1'b0));
      wr(Q + q, MEM_REG, REG_PROG_LEN, 32'd2);
      wr(UNIT_CTRL, MEM_REG, 2 * q, 32'((1 << q) | (1 << (Q + q))));
      wr(UNIT_CTRL, MEM_START, q, 0);
    end
    repeat (5) @(negedge clk);
    check(proc_busy == 2'b11, "both processes active");
    check(proc_ready == 2'b11, "both processes ready");
    trig_in = 2'b01;
    @(negedge clk); trig_in = '0;
    repeat (40) @(negedge clk);
    check(got_v == 2'b01 && got[0] == 32'd1, "qubit 0 reads 1 on its own pulse");
    check(got_fb == 2'b01 && got_fbs[0] == 1'b1, "qubit 0 feedback bit");
    trig_in = 2'b10;
    @(negedge clk); trig_in = '0;
    repeat (40) @(negedge clk);
    check(got_v == 2'b11 && got[1] == 32'd0, "qubit 1 reads 0 on its own pulse");
    check(got_fb == 2'b11 && got_fbs[1] == 1'b0, "qubit 1 feedback bit");
    check(proc_busy == 2'b00, "both processes done");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
