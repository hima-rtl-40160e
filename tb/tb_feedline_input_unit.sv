// tb_feedline_input_unit: one ADC stream shared by two readout input units
// measuring overlapping windows on their own triggers; each unit's result
// must equal the model over the samples of its own window (broadcast with
// one cycle delay).
module tb_feedline_input_unit;
  import hima_pkg::*;
  localparam int K = 2;
  logic clk = 0, rst_n = 0;
  logic cfg_we = 0;
  logic [5:0] cfg_unit = '0;
  logic [2:0] cfg_bank = '0;
  logic [13:0] cfg_word = '0;
  logic [31:0] cfg_data = '0;
  logic [K-1:0] start = '0, trig = '0, fb_valid = '0;
  logic [3:0] fb_vec = '0;
  logic signed [10:0] adc;
  logic [K-1:0] res_valid, fbk_valid, fbk_state, busy, measuring;
  logic [1:0] res_dtype [K];
  logic [31:0] res_data [K];
  int checks = 0, failures = 0;
  int cyc = 0;

  feedline_input_unit #(.K(K), .PROG_DEPTH(16), .KDEPTH(64), .SHM_DEPTH(64), .ADC_W(11), .FB_W(4)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;
  function automatic logic signed [10:0] adcv(int c); return 11'((c * 53) % 300 - 150); endfunction
  assign adc = adcv(cyc);

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

  logic signed [31:0] got [K];
  always @(posedge clk) for (int k = 0; k < K; k++) if (res_valid[k]) got[k] <= res_data[k];

  initial begin
    int t0, t1;
    logic signed [31:0] e0, e1;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int u = 0; u < K; u++) begin
      for (int i = 0; i < 16; i++) wr(u, MEM_WAVE, i, 32'(u == 0 ? 1 : (i % 3) - 1));
      wr(u, MEM_PROG, 0, i_measure(16'd12, DT_INTER, 1'b1, 1'b1));
      wr(u, MEM_REG, REG_PROG_LEN, 32'd1);
    end
    @(negedge clk); start = 2'b11;
    @(negedge clk); start = 0;
    repeat (5) @(negedge clk);
    trig = 2'b01; t0 = cyc;
    @(negedge clk); trig = 0;
    repeat (4) @(negedge clk);
    trig = 2'b10; t1 = cyc;
    @(negedge clk); trig = 0;
    repeat (30) @(negedge clk);
    // the sample acquired in cycle c left the ADC in cycle c-1
    e0 = 0; for (int i = 0; i < 12; i++) e0 += 32'(adcv(t0 + i));
    e1 = 0; for (int i = 0; i < 12; i++) e1 += 32'(adcv(t1 + i) * ((i % 3) - 1));
    check(got[0] == e0, $sformatf("unit 0 window: %0d exp %0d", got[0], e0));
    check(got[1] == e1, $sformatf("unit 1 window: %0d exp %0d", got[1], e1));
    check(busy == '0, "both done");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
