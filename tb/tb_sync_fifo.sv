// tb_sync_fifo: random push/pop against a queue model; checks data order,
// full, empty and count, including simultaneous push and pop.
module tb_sync_fifo;
  localparam int W = 8, D = 4;
  logic clk = 0, rst_n = 0;
  logic push = 0, pop = 0;
  logic [W-1:0] wdata = '0, rdata;
  logic full, empty;
  logic [$clog2(D+1)-1:0] count;
  int checks = 0, failures = 0;
  logic [W-1:0] model [$];

  sync_fifo #(.WIDTH(W), .DEPTH(D)) dut (.*);

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

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 2000; i++) begin
      @(negedge clk);
      check(empty == (model.size() == 0), "empty");
      check(full == (model.size() == D), "full");
      check(count == model.size(), "count");
      if (model.size() > 0) check(rdata == model[0], "head data");
      push  = !full && ($urandom_range(0, 2) != 0);
      pop   = !empty && ($urandom_range(0, 2) != 0);
      wdata = W'($urandom);
      @(posedge clk);
      #1;
      if (pop)  void'(model.pop_front());
      if (push) model.push_back(wdata);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
