// tb_waveform_generator: GATE/WAIT/GATE through the generator; checks the
// LUT samples, idle marking, trig on the first sample only, and that
// back-to-back operations leave no gap when the FIFO is not full.
module tb_waveform_generator;
  import hima_pkg::*;
  logic clk = 0, rst_n = 0;
  logic lut_we = 0;
  logic [10:0] lut_waddr = '0;
  logic [15:0] lut_wdata = '0;
  qop_t qop;
  logic qop_empty, qop_pop, wf_push, wf_full = 0, active;
  sample_t wf_sample;
  int checks = 0, failures = 0;
  qop_t q [$];
  sample_t got [$];
  int push_cycles [$];
  int cyc = 0;

  waveform_generator #(.WAVE_DEPTH(2048)) dut (.*);
  always #5 clk = ~clk;
  assign qop_empty = (q.size() == 0);
  assign qop = qop_empty ? '0 : q[0];

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

  always @(posedge clk) begin
    cyc++;
    if (wf_push) begin got.push_back(wf_sample); push_cycles.push_back(cyc); end
    if (qop_pop) void'(q.pop_front());
  end

  function automatic logic [15:0] lutv(int a); return 16'(a * 3 + 1); endfunction

  task automatic run(input bit backpressure);
    sample_t exp [$];
    got.delete(); push_cycles.delete();
    q.push_back(decode_qop(i_gate(11'd10, 16'd4, 1'b1)));
    q.push_back(decode_qop(i_wait(16'd3, 1'b0)));
    q.push_back(decode_qop(i_gate(11'd100, 16'd2, 1'b1)));
    for (int i = 0; i < 4; i++) exp.push_back('{trig: (i == 0), idle: 1'b0, data: lutv(10 + i)});
    for (int i = 0; i < 3; i++) exp.push_back('{trig: 1'b0, idle: 1'b1, data: 16'd0});
    for (int i = 0; i < 2; i++) exp.push_back('{trig: (i == 0), idle: 1'b0, data: lutv(100 + i)});
    while (got.size() < exp.size()) begin
      @(negedge clk);
      wf_full = backpressure && ($urandom_range(0, 2) == 0);
    end
    wf_full = 0;
    for (int i = 0; i < exp.size(); i++)
      check(got[i] == exp[i], $sformatf("sample %0d: %h exp %h", i, got[i], exp[i]));
    if (!backpressure)
      check(push_cycles[8] - push_cycles[0] == 8, "no gap between operations");
    repeat (3) @(negedge clk);
    check(!active && got.size() == exp.size(), "idle after the last operation");
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 128; i++) begin
      @(negedge clk); lut_we = 1; lut_waddr = 11'(i); lut_wdata = lutv(i);
    end
    @(negedge clk); lut_we = 0;
    run(0);
    run(1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
