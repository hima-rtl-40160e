// tb_trigger_arbiter: staggered triggering. Process 0 starts; process 1's
// initial trigger must be held until process 0's task core counter reaches
// STI[1], and process 2 (STI 0) must pass at once. Non-start triggers pass
// at once. Two feedback requests in one cycle are served one per cycle.
module tb_trigger_arbiter;
  localparam int N = 4, NQ = 8;
  logic clk = 0, rst_n = 0;
  logic sti_we = 0;
  logic [1:0] sti_waddr = '0;
  logic [31:0] sti_wdata = '0;
  logic [N-1:0] req = '0, req_start = '0, core_run = '0, ack, trig_out, held;
  logic [31:0] core_cnt [N];
  logic [N-1:0] fb_req = '0, fb_ack, fb_valid;
  logic [NQ-1:0] fb_data_in [N], fb_data;
  int checks = 0, failures = 0;

  trigger_arbiter #(.N(N), .NQ(NQ)) dut (.*);
  always #5 clk = ~clk;

  // task core counters modelled here: reset on an acknowledged start request
  always @(posedge clk)
    for (int p = 0; p < N; p++)
      if (req[p] && ack[p] && req_start[p]) begin core_cnt[p] <= 0; core_run[p] <= 1; end
      else if (core_run[p]) core_cnt[p] <= core_cnt[p] + 1;

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
    int t;
    for (int p = 0; p < N; p++) begin core_cnt[p] = 0; fb_data_in[p] = NQ'(p + 1); end
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk); sti_we = 1; sti_waddr = 1; sti_wdata = 20;
    @(negedge clk); sti_we = 0;
    // process 0 initial trigger: nobody running, granted
    req[0] = 1; req_start[0] = 1;
    #1 check(ack[0] && trig_out[0], "first start granted");
    @(negedge clk); req[0] = 0;
    // process 1 initial trigger: held until core_cnt[0] >= 20
    req[1] = 1; req_start[1] = 1;
    t = 0;
    #1;
    while (!ack[1]) begin
      check(held[1], "held while inside the STI");
      @(negedge clk); t++;
    end
    check(core_cnt[0] >= 20 && t >= 19 && t <= 21, $sformatf("released after STI (%0d cycles)", t));
    @(negedge clk); req[1] = 0;
    // process 2, STI 0: passes at once
    req[2] = 1; req_start[2] = 1;
    #1 check(ack[2], "zero STI passes at once");
    @(negedge clk); req[2] = 0;
    // process 1 again as a non-start trigger: passes at once
    req[1] = 1; req_start[1] = 0;
    #1 check(ack[1] && !held[1], "mid-shot trigger not staggered");
    @(negedge clk); req[1] = 0;
    // two simultaneous start requests (STI 0): one per cycle
    req[2] = 1; req_start[2] = 1; req[3] = 1; req_start[3] = 1;
    #1 check(ack[2] && !ack[3], "one initial trigger per cycle");
    @(negedge clk); req[2] = 0;
    #1 check(ack[3], "second one next cycle");
    @(negedge clk); req[3] = 0;
    // feedback data transfer
    fb_req = 4'b0110;
    #1 check(fb_ack == 4'b0010 && fb_valid == 4'b0010 && fb_data == 8'd2, "lowest feedback first");
    @(negedge clk); fb_req = 4'b0100;
    #1 check(fb_ack == 4'b0100 && fb_data == 8'd3, "next feedback");
    @(negedge clk); fb_req = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
