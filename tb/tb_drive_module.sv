// tb_drive_module: two processes on one drive board. Process 1 owns units 0
// and 2, process 2 owns unit 1. A trigger of process 1 must start units 0
// and 2 in the same cycle, a fixed number of cycles after the next sync
// tick, and leave unit 1 idle; feedback to process 2 makes unit 1 branch.
module tb_drive_module;
  import hima_pkg::*;
  localparam int N = 4, M = 4;
  logic clk = 0, rst_n = 0, sync_tick = 0;
  logic cfg_we = 0;
  logic [5:0] cfg_unit = '0;
  logic [2:0] cfg_bank = '0;
  logic [13:0] cfg_word = '0;
  logic [31:0] cfg_data = '0;
  logic [N-1:0] trig_in = '0, fb_valid_in = '0, proc_busy, proc_ready;
  logic [3:0] fb_vec = '0;
  logic [15:0] dac_data [M];
  logic [M-1:0] released, unit_busy;
  int checks = 0, failures = 0;
  int cyc = 0, last_tick = 0;
  int first_out [M];
  int tick_at [M];

  drive_module #(.N(N), .M(M), .PROG_DEPTH(16), .WAVE_DEPTH(64), .FB_W(4)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    sync_tick <= ((cyc + 1) % 5 == 0);
    if (sync_tick) last_tick <= cyc;
    for (int m = 0; m < M; m++) if (first_out[m] < 0 && dac_data[m] != 16'd0) begin first_out[m] <= cyc; tick_at[m] <= last_tick; end
  end

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

  initial begin
    int t0;
    for (int m = 0; m < M; m++) first_out[m] = -1;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int u = 0; u < M; u++) begin
      for (int i = 0; i < 16; i++) wr(u, MEM_WAVE, i, 32'(100 * (u + 1) + i));
      wr(u, MEM_PROG, 0, i_gate(11'd0, 16'd4, 1'b1));
      wr(u, MEM_PROG, 1, i_br(8'd1, 16'd2));
      wr(u, MEM_PROG, 2, i_gate(11'd4, 16'd4, 1'b1));
      wr(u, MEM_PROG, 3, i_gate(11'd8, 16'd4, 1'b1));
      wr(u, MEM_REG, REG_PROG_LEN, 32'(u == 1 ? 4 : 1));
    end
    wr(UNIT_CTRL, MEM_REG, 2, 32'b0101);   // process 1: units 0, 2
    wr(UNIT_CTRL, MEM_REG, 4, 32'b0010);   // process 2: unit 1
    repeat (2) @(negedge clk);
    check(proc_ready[2:1] == 2'b00, "processes 1 and 2 not ready before start");
    wr(UNIT_CTRL, MEM_START, 1, 0);
    wr(UNIT_CTRL, MEM_START, 2, 0);
    repeat (10) @(negedge clk);
    check(proc_busy == 4'b0110, "processes 1 and 2 active");
    check(proc_ready[2:1] == 2'b11, "processes 1 and 2 ready");
    trig_in[1] = 1; t0 = cyc;
    @(negedge clk); trig_in = '0;
    repeat (15) @(negedge clk);
    check(first_out[0] > 0 && first_out[0] == first_out[2], "units 0 and 2 start together");
    check(first_out[1] < 0 && first_out[3] < 0, "units 1 and 3 untouched");
    check(first_out[0] - tick_at[0] == 3 && tick_at[0] >= t0, $sformatf("start %0d cycles after sync tick", first_out[0] - tick_at[0]));
    // process 2: trigger, feedback 1 -> skip the GATE at 4, play the one at 8
    trig_in[2] = 1;
    @(negedge clk); trig_in = '0;
    repeat (15) @(negedge clk);
    check(first_out[1] > 0, "unit 1 plays on process 2 trigger");
    fb_vec = 4'b0001; fb_valid_in[2] = 1;
    @(negedge clk); fb_valid_in = '0;
    repeat (5) @(negedge clk);
    trig_in[2] = 1;
    @(negedge clk); trig_in = '0;
    begin
      logic seen8 = 0, seen4 = 0;
      for (int i = 0; i < 15; i++) begin
        @(negedge clk);
        if (dac_data[1] == 16'd208) seen8 = 1;
        if (dac_data[1] == 16'd204) seen4 = 1;
      end
      check(seen8 && !seen4, "feedback branch taken in unit 1");
    end
    check(dac_data[0] == 0 && dac_data[2] == 0, "process 1 units unaffected");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
