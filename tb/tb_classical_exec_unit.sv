// tb_classical_exec_unit: runs a program with a BR twice (feedback 1 takes
// the branch, feedback 0 does not) under random buffer back-pressure and
// compares the issued operation sequence with the expected one.
module tb_classical_exec_unit;
  import hima_pkg::*;
  logic clk = 0, rst_n = 0;
  logic prog_we = 0;
  logic [7:0] prog_waddr = '0;
  instr_t prog_wdata = '0;
  logic [15:0] prog_len = 16'd7, loops = 16'd2;
  logic start = 0, busy, br_wait;
  logic fb_valid = 0, fb_bit = 0;
  logic qop_push, qop_full = 0;
  qop_t qop;
  int checks = 0, failures = 0;
  qop_t got [$];
  int br_wait_cycles = 0;

  classical_exec_unit #(.PROG_DEPTH(256)) dut (.*);
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

  instr_t p [7];
  initial begin
    p[0] = i_gate(11'd5, 16'd4, 1'b1);
    p[1] = i_wait(16'd3, 1'b0);
    p[2] = i_br(8'd1, 16'd2);          // skip p[3] when rs == 1
    p[3] = i_gate(11'd20, 16'd2, 1'b0);
    p[4] = i_measure(16'd9, 2'd1, 1'b1, 1'b0);
    p[5] = i_trigger(1'b1, 1'b1);      // not an execution-unit opcode: skipped
    p[6] = i_gate(11'd30, 16'd1, 1'b0);
  end

  always @(posedge clk) begin
    if (qop_push && !qop_full) got.push_back(qop);
    if (br_wait) br_wait_cycles++;
    qop_full <= ($urandom_range(0, 3) == 0);
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 7; i++) begin
      @(negedge clk); prog_we = 1; prog_waddr = 8'(i); prog_wdata = p[i];
    end
    @(negedge clk); prog_we = 0; start = 1;
    @(negedge clk); start = 0;
    // first pass: wait in BR, then feedback 1
    while (!br_wait) @(negedge clk);
    repeat (10) @(negedge clk);
    check(br_wait && got.size() == 2, "parsing stalls on BR until feedback");
    fb_valid = 1; fb_bit = 1;
    @(negedge clk); fb_valid = 0;
    // second pass: feedback arrives before BR is reached (must be kept)
    while (got.size() < 5) @(negedge clk);
    fb_valid = 1; fb_bit = 0;
    @(negedge clk); fb_valid = 0;
    while (busy) @(negedge clk);
    repeat (3) @(negedge clk);
    // expected: pass1 = 0,1,4,6 ; pass2 = 0,1,3,4,6
    begin
      int exp_idx [9] = '{0, 1, 4, 6, 0, 1, 3, 4, 6};
      check(got.size() == 9, $sformatf("issued %0d ops", got.size()));
      for (int i = 0; i < 9 && i < got.size(); i++)
        check(got[i] == decode_qop(p[exp_idx[i]]), $sformatf("op %0d", i));
    end
    check(br_wait_cycles >= 10, "br_wait observed");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
