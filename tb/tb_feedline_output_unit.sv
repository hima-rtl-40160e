// tb_feedline_output_unit: two readout output units with different pulses,
// triggered at different times; the feedline DAC stream must be the sum of
// both, and saturate when the sum leaves the 16-bit range.
module tb_feedline_output_unit;
  import hima_pkg::*;
  localparam int K = 2;
  logic clk = 0, rst_n = 0;
  logic cfg_we = 0;
  logic [5:0] cfg_unit = '0;
  logic [2:0] cfg_bank = '0;
  logic [13:0] cfg_word = '0;
  logic [31:0] cfg_data = '0;
  logic [K-1:0] start = '0, trig = '0, fb_valid = '0, busy, released;
  logic [3:0] fb_vec = '0;
  logic [15:0] dac_data;
  int checks = 0, failures = 0;

  feedline_output_unit #(.K(K), .PROG_DEPTH(16), .WAVE_DEPTH(64), .FB_W(4)) dut (.*);
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

  task automatic wr(input int u, input logic [2:0] b, input int w, input logic [31:0] d);
    @(negedge clk); cfg_we = 1; cfg_unit = 6'(u); cfg_bank = b; cfg_word = 14'(w); cfg_data = d;
    @(negedge clk); cfg_we = 0;
  endtask

  function automatic logic signed [15:0] w0(int i); return 16'(100 * i + 5); endfunction
  function automatic logic signed [15:0] w1(int i); return 16'(-30 * i); endfunction

  initial begin
    logic signed [17:0] s;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 8; i++) begin
      wr(0, MEM_WAVE, i, 32'(w0(i)));
      wr(1, MEM_WAVE, i, 32'(w1(i)));
    end
    wr(0, MEM_WAVE, 8, 32'h7000); wr(1, MEM_WAVE, 8, 32'h7000);   // overflow pair
    for (int u = 0; u < K; u++) begin
      wr(u, MEM_PROG, 0, i_gate(11'd0, 16'd8, 1'b1));
      wr(u, MEM_PROG, 1, i_gate(11'd8, 16'd1, 1'b1));
      wr(u, MEM_REG, REG_PROG_LEN, 32'd2);
    end
    @(negedge clk); start = 2'b11;
    @(negedge clk); start = 0;
    repeat (20) @(negedge clk);
    check(dac_data == 16'd0, "silent before trigger");
    trig = 2'b01;
    @(negedge clk); trig = 0;
    @(negedge clk);
    check($signed(dac_data) == w0(0), "unit 0 alone");
    @(negedge clk);
    check($signed(dac_data) == w0(1), "unit 0 alone, next");
    trig = 2'b10;
    @(negedge clk); trig = 0;
    // unit 1 starts 3 cycles after unit 0
    for (int i = 3; i < 8; i++) begin
      @(negedge clk);
      s = w0(i) + ((i >= 3) ? w1(i - 3 + 0) : 0);
      check($signed(dac_data) == 16'(s), $sformatf("sum at %0d: %0d exp %0d", i, $signed(dac_data), s));
    end
    repeat (10) @(negedge clk);
    trig = 2'b11;
    @(negedge clk); trig = 0;
    @(negedge clk);
    check(dac_data == 16'h7fff, "positive saturation");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
