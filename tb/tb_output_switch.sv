// tb_output_switch: a trig-flagged sample must wait (IDLE value out) until
// the trigger, then appear one cycle after it; idle samples and an empty
// FIFO give the IDLE value; an early trigger is remembered.
module tb_output_switch;
  import hima_pkg::*;
  logic clk = 0, rst_n = 0;
  sample_t head;
  logic empty, pop, trig_in = 0;
  logic [15:0] idle_value = 16'h0abc, dac_data;
  logic played, released, holding;
  int checks = 0, failures = 0;
  sample_t q [$];

  output_switch dut (.*);
  always #5 clk = ~clk;
  assign empty = (q.size() == 0);
  assign head  = empty ? '0 : q[0];
  always @(posedge clk) if (pop) void'(q.pop_front());

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input logic c, input string m);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", m); end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    q.push_back('{trig: 1, idle: 0, data: 16'd100});
    q.push_back('{trig: 0, idle: 0, data: 16'd101});
    q.push_back('{trig: 0, idle: 1, data: 16'd0});
    q.push_back('{trig: 0, idle: 0, data: 16'd102});
    for (int i = 0; i < 20; i++) begin
      @(negedge clk);
      check(dac_data == 16'h0abc && holding, "held before trigger");
    end
    trig_in = 1;
    @(negedge clk); trig_in = 0;
    check(dac_data == 16'd100, "first sample one cycle after trigger");
    @(negedge clk); check(dac_data == 16'd101, "second sample");
    @(negedge clk); check(dac_data == 16'h0abc, "idle sample gives IDLE value");
    @(negedge clk); check(dac_data == 16'd102, "fourth sample");
    @(negedge clk); check(dac_data == 16'h0abc && !played, "empty FIFO gives IDLE value");
    // early trigger: arrives while FIFO is empty, kept for the next flagged sample
    trig_in = 1;
    @(negedge clk); trig_in = 0;
    repeat (3) @(negedge clk);
    q.push_back('{trig: 1, idle: 0, data: 16'd200});
    @(negedge clk);
    check(dac_data == 16'd200, "early trigger remembered");
    q.push_back('{trig: 1, idle: 0, data: 16'd300});
    repeat (3) @(negedge clk);
    check(dac_data == 16'h0abc && holding, "trigger used only once");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
