// tb_qr_input_unit: a MEASURE with trig waits for the trigger and then
// integrates exactly dur samples starting the cycle after the trigger; a
// following WAIT and MEASURE run back to back. Results are compared with a
// model fed by the same known ADC stream.
module tb_qr_input_unit;
  import hima_pkg::*;
  logic clk = 0, rst_n = 0;
  logic cfg_we = 0;
  logic [2:0] cfg_bank = '0;
  logic [13:0] cfg_word = '0;
  logic [31:0] cfg_data = '0;
  logic start = 0, trig = 0, fb_valid = 0;
  logic [3:0] fb_vec = '0;
  logic signed [10:0] adc;
  logic res_valid, fbk_valid, fbk_state, busy, measuring;
  logic [1:0] res_dtype;
  logic [31:0] res_data;
  int checks = 0, failures = 0;
  int cyc = 0;

  qr_input_unit #(.PROG_DEPTH(32), .KDEPTH(64), .ADC_W(11), .FB_W(4)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;
  // ADC stream: a known function of the cycle number
  function automatic logic signed [10:0] adcv(int c); return 11'((c * 37) % 200 - 100); endfunction
  assign adc = adcv(cyc);
  function automatic logic signed [15:0] kv(int i); return 16'(i % 5 - 2); endfunction

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

  int meas_start [$];
  logic measuring_q = 0;
  always @(posedge clk) begin
    measuring_q <= measuring;
    if (measuring && !measuring_q) meas_start.push_back(cyc);
  end

  initial begin
    int t0;
    logic signed [31:0] e1, e2;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 64; i++) wr(MEM_WAVE, i, 32'(kv(i)));
    wr(MEM_PROG, 0, i_measure(16'd10, DT_STATE, 1'b1, 1'b1));
    wr(MEM_PROG, 1, i_wait(16'd5, 1'b0));
    wr(MEM_PROG, 2, i_measure(16'd6, DT_INTER, 1'b0, 1'b0));
    wr(MEM_REG, REG_PROG_LEN, 32'd3);
    wr(MEM_REG, REG_IDLE, 32'sd20);
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    repeat (20) @(negedge clk);
    check(!measuring && meas_start.size() == 0, "no acquisition before trigger");
    trig = 1; t0 = cyc;
    @(negedge clk); trig = 0;
    // samples reaching the unit: window 1 starts at cycle t0+1
    e1 = 0; for (int i = 0; i < 10; i++) e1 += 32'(adcv(t0 + 1 + i) * kv(i));
    e2 = 0; for (int i = 0; i < 6; i++)  e2 += 32'(adcv(t0 + 16 + i) * kv(i));
    while (!res_valid) @(negedge clk);
    check(meas_start.size() == 1 && meas_start[0] == t0 + 1, "MEASURE starts one cycle after trigger");
    check(res_dtype == DT_STATE && res_data == {31'd0, e1 > 20}, "state result");
    check(fbk_valid && fbk_state == (e1 > 20), "feedback result");
    @(negedge clk);
    while (!res_valid) @(negedge clk);
    check(meas_start.size() == 2 && meas_start[1] == t0 + 16, "WAIT 5 then MEASURE");
    check(res_dtype == DT_INTER && $signed(res_data) == e2, "intermediate result");
    check(!fbk_valid, "no fb strobe without fb flag");
    repeat (3) @(negedge clk);
    check(!busy, "program finished");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
