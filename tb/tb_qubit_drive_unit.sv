// tb_qubit_drive_unit: loads a program and waveform over the configuration
// port, starts the unit, and checks that nothing but the IDLE value leaves
// before the trigger, that the gate samples appear exactly one cycle after
// the trigger, back to back, and that a BR takes its branch from feedback.
module tb_qubit_drive_unit;
  import hima_pkg::*;
  logic clk = 0, rst_n = 0;
  logic cfg_we = 0;
  logic [2:0] cfg_bank = '0;
  logic [13:0] cfg_word = '0;
  logic [31:0] cfg_data = '0;
  logic start = 0, trig = 0, fb_valid = 0;
  logic [3:0] fb_vec = '0;
  logic [15:0] dac_data;
  logic played, released, busy, br_wait;
  int checks = 0, failures = 0;

  qubit_drive_unit #(.PROG_DEPTH(64), .WAVE_DEPTH(256), .FB_W(4)) dut (.*);
  always #5 clk = ~clk;

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

  task automatic wr(input logic [2:0] b, input int w, input logic [31:0] d);
    @(negedge clk); cfg_we = 1; cfg_bank = b; cfg_word = 14'(w); cfg_data = d;
    @(negedge clk); cfg_we = 0;
  endtask

  function automatic logic [15:0] wv(int a); return 16'(1000 + a * 7); endfunction

  // Program: GATE 0,4 trig ; GATE 16,2 ; WAIT 2 ; BR imm=1 +2 ; GATE 32,3 trig ; GATE 48,2 trig ; STOP
  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int a = 0; a < 64; a++) wr(MEM_WAVE, a, 32'(wv(a)));
    wr(MEM_PROG, 0, i_gate(11'd0, 16'd4, 1'b1));
    wr(MEM_PROG, 1, i_gate(11'd16, 16'd2, 1'b0));
    wr(MEM_PROG, 2, i_wait(16'd2, 1'b0));
    wr(MEM_PROG, 3, i_br(8'd1, 16'd2));
    wr(MEM_PROG, 4, i_gate(11'd32, 16'd3, 1'b1));
    wr(MEM_PROG, 5, i_gate(11'd48, 16'd2, 1'b1));
    wr(MEM_PROG, 6, i_stop());
    wr(MEM_REG, REG_PROG_LEN, 32'd7);
    wr(MEM_REG, REG_LOOPS, 32'd1);
    wr(MEM_REG, REG_FB_SEL, 32'd2);
    wr(MEM_REG, REG_IDLE, 32'h0000_0555);
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    for (int i = 0; i < 30; i++) begin
      @(negedge clk);
      check(dac_data == 16'h0555, "IDLE before trigger");
    end
    check(br_wait, "BR waiting for feedback");
    trig = 1;
    @(negedge clk); trig = 0;
    for (int i = 0; i < 4; i++) begin
      check(dac_data == wv(i), $sformatf("gate1 sample %0d", i));
      @(negedge clk);
    end
    for (int i = 0; i < 2; i++) begin
      check(dac_data == wv(16 + i), $sformatf("gate2 sample %0d", i));
      @(negedge clk);
    end
    for (int i = 0; i < 2; i++) begin
      check(dac_data == 16'h0555, "WAIT plays IDLE");
      @(negedge clk);
    end
    // feedback bit 2 = 1: branch to index 5 (skip GATE 32)
    fb_vec = 4'b0100; fb_valid = 1;
    @(negedge clk); fb_valid = 0;
    repeat (10) @(negedge clk);
    check(dac_data == 16'h0555, "held again until the next trigger");
    trig = 1;
    @(negedge clk); trig = 0;
    for (int i = 0; i < 2; i++) begin
      check(dac_data == wv(48 + i), $sformatf("branch target sample %0d", i));
      @(negedge clk);
    end
    check(dac_data == 16'h0555, "IDLE after program end");
    check(!busy, "unit finished");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
