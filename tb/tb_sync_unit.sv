// tb_sync_unit: random triggers and ticks; every trigger must leave exactly
// in the cycle after the first tick at or after it, and never otherwise.
module tb_sync_unit;
  localparam int N = 4;
  logic clk = 0, rst_n = 0, sync_tick = 0;
  logic [N-1:0] trig_in = '0, trig_out;
  int checks = 0, failures = 0;
  logic [N-1:0] pend = '0, exp_out = '0;

  sync_unit #(.N(N)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      checks++;
      if (trig_out != exp_out) begin failures++; $display("FAIL cycle %0d", i); end
      trig_in   = N'($urandom) & N'($urandom);
      sync_tick = ($urandom_range(0, 7) == 0);
      if (sync_tick) begin exp_out = pend | trig_in; pend = '0; end
      else begin exp_out = '0; pend = pend | trig_in; end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
