// tb_dispatcher: per-process strobe vectors over disjoint unit masks must
// arrive merged, one cycle later.
module tb_dispatcher;
  localparam int N = 4, M = 8;
  logic clk = 0, rst_n = 0;
  logic [M-1:0] pm_start [N], pm_trig [N], pm_fb [N];
  logic [M-1:0] unit_start, unit_trig, unit_fb;
  logic conflict;
  int checks = 0, failures = 0;

  dispatcher #(.N(N), .M(M)) dut (.*);
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
    logic [M-1:0] own [N];
    logic [M-1:0] es, et, ef;
    for (int p = 0; p < N; p++) begin pm_start[p] = '0; pm_trig[p] = '0; pm_fb[p] = '0; end
    // fixed disjoint ownership: unit u belongs to process u % N
    for (int p = 0; p < N; p++) begin
      own[p] = '0;
      for (int u = 0; u < M; u++) if (u % N == p) own[p][u] = 1'b1;
    end
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 200; i++) begin
      @(negedge clk);
      es = '0; et = '0; ef = '0;
      for (int p = 0; p < N; p++) begin
        pm_start[p] = $urandom_range(0, 1) ? own[p] : '0;
        pm_trig[p]  = $urandom_range(0, 1) ? own[p] : '0;
        pm_fb[p]    = $urandom_range(0, 1) ? own[p] : '0;
        es |= pm_start[p]; et |= pm_trig[p]; ef |= pm_fb[p];
      end
      @(negedge clk);
      check(unit_start == es && unit_trig == et && unit_fb == ef, "merged strobes");
      check(!conflict, "no conflict for disjoint masks");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
