// tb_process_manager: strobes must reach exactly the units of the mask, and
// busy must reflect only those units.
module tb_process_manager;
  localparam int M = 8;
  logic clk = 0, rst_n = 0;
  logic mask_we = 0;
  logic [M-1:0] mask_wdata = '0, mask, unit_busy = '0, unit_start, unit_trig, unit_fb;
  logic start = 0, trig = 0, fb_valid = 0, busy, ready;
  int checks = 0, failures = 0;

  process_manager #(.M(M)) dut (.*);
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

  initial begin
    logic [M-1:0] m;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 100; i++) begin
      m = M'($urandom);
      @(negedge clk); mask_we = 1; mask_wdata = m;
      @(negedge clk); mask_we = 0;
      start = $urandom_range(0, 1); trig = $urandom_range(0, 1); fb_valid = $urandom_range(0, 1);
      unit_busy = M'($urandom);
      #1;
      check(mask == m, "mask stored");
      check(unit_start == (start ? m : '0), "start to masked units");
      check(unit_trig == (trig ? m : '0), "trigger to masked units");
      check(unit_fb == (fb_valid ? m : '0), "feedback to masked units");
      check(busy == |(unit_busy & m), "busy of own units");
      check(ready == ((unit_busy & m) == m), "ready when all own units active");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
