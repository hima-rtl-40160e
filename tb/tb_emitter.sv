// tb_emitter: per-process port masks from the configuration LUT; triggers
// and feedback strobes must reach exactly the masked ports one cycle later,
// with feedback data sliced per child (SLICE = 1).
module tb_emitter;
  localparam int N = 4, K = 3, CQ = 4, NQ = 12;
  logic clk = 0, rst_n = 0;
  logic lut_we = 0;
  logic [1:0] lut_waddr = '0;
  logic [31:0] lut_wdata = '0;
  logic [N-1:0] trig = '0, fb_valid = '0;
  logic [NQ-1:0] fb_data = '0;
  logic [N-1:0] trig_out [K], fb_valid_out [K];
  logic [CQ-1:0] fb_data_out [K];
  logic [N-1:0] port_ready [K], ready;
  int checks = 0, failures = 0;

  emitter #(.N(N), .K(K), .NQ(NQ), .CQ(CQ), .SLICE(1'b1)) dut (.*);
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
    logic [K-1:0] m [N];
    for (int k = 0; k < K; k++) port_ready[k] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int p = 0; p < N; p++) begin
      m[p] = K'($urandom);
      @(negedge clk); lut_we = 1; lut_waddr = 2'(p); lut_wdata = 32'(m[p]);
    end
    @(negedge clk); lut_we = 0;
    for (int i = 0; i < 200; i++) begin
      @(negedge clk);
      trig = N'($urandom); fb_valid = N'($urandom); fb_data = NQ'($urandom);
      for (int k = 0; k < K; k++) port_ready[k] = N'($urandom);
      #1;
      for (int p = 0; p < N; p++) begin
        logic r;
        r = 1'b1;
        for (int k = 0; k < K; k++) if (m[p][k] && !port_ready[k][p]) r = 1'b0;
        check(ready[p] == r, "ready = all masked ports ready");
      end
      @(negedge clk);
      for (int k = 0; k < K; k++) begin
        for (int p = 0; p < N; p++) begin
          check(trig_out[k][p] == (trig[p] && m[p][k]), "trigger by mask");
          check(fb_valid_out[k][p] == (fb_valid[p] && m[p][k]), "feedback strobe by mask");
        end
        if (|fb_valid) check(fb_data_out[k] == fb_data[k*CQ +: CQ], "feedback slice");
      end
      trig = '0; fb_valid = '0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
