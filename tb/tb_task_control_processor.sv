// tb_task_control_processor: a controller program
//   TRIGGER 1,0 ; WAIT 10 ; FEEDBACK 0 ; BR 1,+2 ; TRIGGER 0,0 ; TRIGGER 0,1 ; STOP
// run twice. Checks: the initial trigger waits for the arbitration's
// acknowledge and resets the task core counter; WAIT lasts 10 cycles; the
// feedback interrupt waits for both masked qubits, sends the parity to all
// qubits and branches on it; TRIGGER with trig = 1 waits for the upper-layer
// trigger.
module tb_task_control_processor;
  import hima_pkg::*;
  localparam int NQ = 8;
  logic clk = 0, rst_n = 0;
  logic prog_we = 0, fbt_we = 0;
  logic [5:0] prog_waddr = '0;
  logic [6:0] fbt_waddr = '0;
  instr_t prog_wdata = '0;
  logic [31:0] fbt_wdata = '0;
  logic [15:0] prog_len = 16'd7, loops = 16'd2;
  logic start = 0, busy, up_trig = 0, ready = 0;
  logic trig_req, trig_start, trig_ack, core_run, fb_req, fb_ack, in_feedback;
  logic [31:0] core_cnt;
  logic [NQ-1:0] res_valid = '0, res_state = '0, fb_data;
  int checks = 0, failures = 0;
  int cyc = 0, hold = 0;
  int trig_cyc [$];
  logic trig_was_start [$];
  int fb_cyc [$];
  logic [NQ-1:0] fb_seen [$];

  task_control_processor #(.PROG_DEPTH(64), .FB_ENTRIES(16), .NQ(NQ)) dut (.*);
  always #5 clk = ~clk;

  // arbitration stand-in: initial triggers acknowledged after 3 cycles
  assign trig_ack = trig_req && (!trig_start || hold >= 3);
  assign fb_ack   = fb_req;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    hold <= (trig_req && trig_start && !trig_ack) ? hold + 1 : 0;
    if (trig_req && trig_ack) begin trig_cyc.push_back(cyc); trig_was_start.push_back(trig_start); end
    if (fb_req && fb_ack) begin fb_cyc.push_back(cyc); fb_seen.push_back(fb_data); end
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

  task automatic result(input int q, input logic s);
    @(negedge clk); res_valid = '0; res_valid[q] = 1'b1; res_state = '0; res_state[q] = s;
    @(negedge clk); res_valid = '0;
  endtask

  initial begin
    instr_t p [7];
    p[0] = i_trigger(1'b1, 1'b0);
    p[1] = i_wait(16'd10, 1'b0);
    p[2] = i_feedback(16'd0);
    p[3] = i_br(8'd1, 16'd2);
    p[4] = i_trigger(1'b0, 1'b0);
    p[5] = i_trigger(1'b0, 1'b1);
    p[6] = i_stop();
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 7; i++) begin
      @(negedge clk); prog_we = 1; prog_waddr = 6'(i); prog_wdata = p[i];
    end
    @(negedge clk); prog_we = 0;
    @(negedge clk); fbt_we = 1; fbt_waddr = 7'd0; fbt_wdata = 32'h0000_0024;   // qubits 2 and 5
    @(negedge clk); fbt_waddr = 7'd7; fbt_wdata = 32'd1;                      // parity
    @(negedge clk); fbt_we = 0;
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    repeat (6) @(negedge clk);
    check(busy && !trig_req && trig_cyc.size() == 0, "initial trigger waits for ready");
    ready = 1;
    // pass 1: states 1 and 0 -> parity 1 -> branch over p[4]
    repeat (20) @(negedge clk);
    check(in_feedback && !fb_req, "feedback waits for results");
    result(2, 1'b1);
    repeat (3) @(negedge clk);
    check(in_feedback && !fb_req, "still one result missing");
    result(5, 1'b0);
    repeat (5) @(negedge clk);
    check(busy && trig_cyc.size() == 1, "TRIGGER 0,1 waits for upper trigger");
    up_trig = 1;
    @(negedge clk); up_trig = 0;
    // pass 2: states 1 and 1 -> parity 0 -> no branch
    repeat (20) @(negedge clk);
    result(2, 1'b1);
    result(5, 1'b1);
    repeat (10) @(negedge clk);
    up_trig = 1;
    @(negedge clk); up_trig = 0;
    repeat (5) @(negedge clk);
    check(!busy, "program done after two passes");
    check(trig_cyc.size() == 5, $sformatf("trigger count %0d", trig_cyc.size()));
    check(trig_was_start.size() >= 3 && trig_was_start[0] && !trig_was_start[1] && trig_was_start[2],
          "start flags");
    check(fb_seen.size() == 2 && fb_seen[0] == '1 && fb_seen[1] == '0, "parity feedback data");
    check(fb_cyc.size() == 2 && fb_cyc[0] - trig_cyc[0] >= 10, "WAIT 10 before FEEDBACK");
    check(core_cnt < 100 && core_run == 1'b0, "task core counter cleared at the end");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
