// tb_readout_dpu: random samples and kernel; checks the weighted sum
// (intermediate result), the thresholded state with the fb strobe, and raw
// data output, against a model computed in the testbench.
module tb_readout_dpu;
  import hima_pkg::*;
  logic clk = 0, rst_n = 0;
  logic k_we = 0;
  logic [7:0] k_waddr = '0;
  logic [15:0] k_wdata = '0;
  logic signed [31:0] threshold = 32'sd0;
  logic acq = 0, first = 0, last = 0, fb = 0;
  logic [1:0] dtype = '0;
  logic signed [10:0] adc = '0;
  logic res_valid, fb_valid, fb_state;
  logic [1:0] res_dtype;
  logic [31:0] res_data;
  int checks = 0, failures = 0;
  logic signed [15:0] kern [256];

  readout_dpu #(.ADC_W(11), .KDEPTH(256)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input logic c, input string m);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", m); end
  endtask

  task automatic window(input int len, input logic [1:0] dt, input logic f, output logic signed [31:0] acc);
    logic signed [10:0] s [$];
    acc = 0;
    for (int i = 0; i < len; i++) begin
      @(negedge clk);
      acq = 1; first = (i == 0); last = (i == len - 1); dtype = dt; fb = f;
      adc = 11'($urandom);
      acc += 32'(adc * kern[i]);
      s.push_back(adc);
      if (dt == DT_RAW && i > 0) check(res_valid && $signed(res_data) == 32'(s[i-1]), "raw sample");
    end
    @(negedge clk);
    acq = 0; first = 0; last = 0;
    if (dt == DT_RAW) check(res_valid && $signed(res_data) == 32'(s[len-1]), "last raw sample");
  endtask

  initial begin
    logic signed [31:0] acc;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 256; i++) begin
      kern[i] = 16'($urandom_range(0, 2000)) - 16'sd1000;
      @(negedge clk); k_we = 1; k_waddr = 8'(i); k_wdata = kern[i];
    end
    @(negedge clk); k_we = 0;
    for (int r = 0; r < 20; r++) begin
      int len = $urandom_range(1, 200);
      window(len, DT_INTER, 1'b0, acc);
      check(res_valid && res_dtype == DT_INTER && $signed(res_data) == acc, "intermediate result");
      check(!fb_valid, "no fb strobe without fb flag");
      threshold = 32'sd500 - 32'($urandom_range(0, 1000));
      window(len, DT_STATE, 1'b1, acc);
      check(res_valid && res_dtype == DT_STATE && res_data == {31'd0, acc > threshold}, "state");
      check(fb_valid && fb_state == (acc > threshold), "fb state");
    end
    window(16, DT_RAW, 1'b0, acc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
