// tb_sync_pulse_gen: the tick must come exactly once every PERIOD cycles.
module tb_sync_pulse_gen;
  logic clk = 0, rst_n = 0, sync_tick;
  int checks = 0, failures = 0;

  sync_pulse_gen #(.PERIOD(6)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int last = -1, n = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 200; i++) begin
      @(negedge clk);
      if (sync_tick) begin
        n++;
        if (last >= 0) begin
          checks++;
          if (i - last != 6) begin failures++; $display("FAIL period %0d", i - last); end
        end
        last = i;
      end
    end
    checks++;
    if (n < 30) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
