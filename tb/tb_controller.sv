// tb_controller: a small controller (4 processes, 2 downstream ports,
// 8 qubits sliced 4 per port) checked for
//  - emitter masks: each process's triggers reach only its ports;
//  - staggered triggering: process 1's initial trigger is held until
//    process 0 has run STI[1] cycles since its own initial trigger;
//  - feedback: collect two qubit results, parity decision, sliced feedback
//    data to the ports, and BR on the decision bit;
//  - forwarding: an idle process passes upper-layer triggers (after the sync
//    pulse) and feedback data straight down;
//  - task scheduler: a start for a busy process is rejected and counted;
//  - results are passed up one register later;
//  - readiness: a start trigger waits until every port of the mask is ready.
module tb_controller;
  import hima_pkg::*;
  localparam int N = 4, K = 2, NQ = 8, CQ = 4;
  logic clk = 0, rst_n = 0, sync_tick = 0;
  logic cfg_we = 0;
  logic [5:0] cfg_unit = '0;
  logic [2:0] cfg_bank = '0;
  logic [13:0] cfg_word = '0;
  logic [31:0] cfg_data = '0;
  logic [N-1:0] up_trig = '0, up_fb_valid = '0;
  logic [NQ-1:0] up_fb_data = '0, res_valid_in = '0, res_state_in = '0, res_valid_up, res_state_up;
  logic [N-1:0] trig_out [K], fb_valid_out [K];
  logic [CQ-1:0] fb_data_out [K];
  logic [N-1:0] tcp_busy, stagger_held, in_feedback;
  logic [15:0] rejects;
  logic [N-1:0] down_ready [K] = '{default: '1};
  logic [N-1:0] ready_up;
  int checks = 0, failures = 0, cyc = 0;

  controller #(.N(N), .K(K), .NQ(NQ), .CQ(CQ), .SLICE(1'b1), .PROG_DEPTH(16), .FB_ENTRIES(4)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    sync_tick <= ((cyc + 1) % 8 == 0);
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
  task automatic wr(input int u, input logic [2:0] b, input int w, input logic [31:0] d);
    @(negedge clk); cfg_we = 1; cfg_unit = 6'(u); cfg_bank = b; cfg_word = 14'(w); cfg_data = d;
    @(negedge clk); cfg_we = 0;
  endtask

  // per port and process: number of trigger pulses and the last cycle seen
  int tcount [K][N];
  int tlast [K][N];
  int held_seen = 0;
  logic [CQ-1:0] fbd [K];
  int fbcount [K][N];
  always @(posedge clk) if (rst_n) begin
    if (stagger_held[1]) held_seen++;
    for (int k = 0; k < K; k++)
      for (int p = 0; p < N; p++) begin
        if (trig_out[k][p]) begin tcount[k][p]++; tlast[k][p] = cyc; end
        if (fb_valid_out[k][p]) begin fbcount[k][p]++; fbd[k] = fb_data_out[k]; end
      end
  end

  task automatic result(input int q, input logic s);
    @(negedge clk); res_valid_in = NQ'(1) << q; res_state_in = s ? NQ'(1) << q : '0;
    @(negedge clk); res_valid_in = '0; res_state_in = '0;
  endtask

  initial begin
    for (int k = 0; k < K; k++)
      for (int p = 0; p < N; p++) begin tcount[k][p] = 0; fbcount[k][p] = 0; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    wr(0, MEM_EMIT, 0, 32'b01);
    wr(1, MEM_EMIT, 0, 32'b10);
    wr(2, MEM_EMIT, 0, 32'b11);
    wr(3, MEM_EMIT, 0, 32'b11);
    wr(1, MEM_STI, 0, 32'd20);
    // process 0: initial trigger, long wait
    wr(0, MEM_PROG, 0, i_trigger(1'b1, 1'b0));
    wr(0, MEM_PROG, 1, i_wait(16'd400, 1'b0));
    wr(0, MEM_PROG, 2, i_stop());
    wr(0, MEM_REG, REG_PROG_LEN, 32'd3);
    // process 1: initial trigger only
    wr(1, MEM_PROG, 0, i_trigger(1'b1, 1'b0));
    wr(1, MEM_PROG, 1, i_stop());
    wr(1, MEM_REG, REG_PROG_LEN, 32'd2);
    // process 2: feedback on qubits 0 and 5 (parity), trigger if parity 0
    wr(2, MEM_WAVE, 0, 32'h21);
    wr(2, MEM_WAVE, 7, 32'd1);
    wr(2, MEM_PROG, 0, i_feedback(16'd0));
    wr(2, MEM_PROG, 1, i_br(8'd1, 16'd2));
    wr(2, MEM_PROG, 2, i_trigger(1'b0, 1'b0));
    wr(2, MEM_PROG, 3, i_stop());
    wr(2, MEM_REG, REG_PROG_LEN, 32'd4);

    // staggering and masks
    wr(0, MEM_START, 0, 0);
    wr(1, MEM_START, 0, 0);
    repeat (40) @(negedge clk);
    check(tcount[0][0] == 1 && tcount[1][0] == 0, "process 0 trigger on port 0 only");
    check(tcount[1][1] == 1 && tcount[0][1] == 0, "process 1 trigger on port 1 only");
    check(tlast[1][1] - tlast[0][0] >= 20, "process 1 staggered by STI");
    check(tlast[1][1] - tlast[0][0] <= 22, "process 1 released once STI has passed");
    check(held_seen > 10, "stagger hold observed");
    // task scheduler reject
    wr(0, MEM_START, 0, 0);
    check(rejects == 16'd1, "start of a busy process rejected");
    check(tcp_busy[0] && !tcp_busy[1], "process 0 still busy, process 1 done");

    // feedback, parity 1: no trigger, all-ones feedback on both ports
    wr(2, MEM_START, 0, 0);
    repeat (3) @(negedge clk);
    check(in_feedback[2], "process 2 waits for results");
    result(0, 1'b1);
    repeat (3) @(negedge clk);
    check(in_feedback[2] && fbcount[0][2] == 0, "still waiting for qubit 5");
    result(5, 1'b0);
    check(res_valid_up == NQ'(1) << 5, "result passed up one register later");
    repeat (6) @(negedge clk);
    check(fbcount[0][2] == 1 && fbcount[1][2] == 1, "feedback data on both ports");
    check(fbd[0] == 4'hf && fbd[1] == 4'hf, "parity 1 broadcast");
    check(tcount[0][2] == 0 && !tcp_busy[2], "BR skipped the trigger");
    // feedback, parity 0: trigger sent
    wr(2, MEM_START, 0, 0);
    result(0, 1'b1);
    result(5, 1'b1);
    repeat (6) @(negedge clk);
    check(fbd[0] == 4'h0 && fbd[1] == 4'h0, "parity 0 broadcast");
    check(tcount[0][2] == 1 && tcount[1][2] == 1, "BR fell through to the trigger");

    // forwarding of idle process 3
    @(negedge clk); up_trig = 4'b1000;
    @(negedge clk); up_trig = '0;
    repeat (12) @(negedge clk);
    check(tcount[0][3] == 1 && tcount[1][3] == 1, "upper trigger forwarded");
    check(tlast[0][3] % 8 == 2, "forwarded trigger aligned to the sync pulse");
    @(negedge clk); up_fb_valid = 4'b1000; up_fb_data = 8'ha5;
    @(negedge clk); up_fb_valid = '0;
    repeat (2) @(negedge clk);
    check(fbcount[0][3] == 1 && fbd[0] == 4'h5 && fbd[1] == 4'ha, "upper feedback forwarded, sliced");
    // a busy process does not forward
    @(negedge clk); up_trig = 4'b0001;
    @(negedge clk); up_trig = '0;
    repeat (12) @(negedge clk);
    check(tcount[0][0] == 1, "busy process keeps the upper trigger to itself");
    // readiness: process 1 (port 1) holds its start trigger while port 1 is not ready
    check(ready_up[1], "process 1 reported ready");
    down_ready[1][1] = 1'b0;
    repeat (2) @(negedge clk);
    check(!ready_up[1], "process 1 not ready once its port is not");
    wr(1, MEM_START, 0, 0);
    repeat (30) @(negedge clk);
    check(tcount[1][1] == 1 && tcp_busy[1], "start trigger waits for readiness");
    down_ready[1][1] = 1'b1;
    repeat (4) @(negedge clk);
    check(tcount[1][1] == 2 && !tcp_busy[1], "start trigger sent once ready");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
