// tb_feedback_decision_unit: random states, masks and modes against a
// bit-by-bit model of forward, parity and any.
module tb_feedback_decision_unit;
  localparam int NQ = 24;
  logic [NQ-1:0] states, mask, fb_data;
  logic [1:0] mode;
  logic ctrl_bit;
  int checks = 0, failures = 0;

  feedback_decision_unit #(.NQ(NQ)) dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic par, any;
    logic [NQ-1:0] exp;
    for (int i = 0; i < 500; i++) begin
      states = NQ'($urandom); mask = NQ'($urandom); mode = 2'($urandom_range(0, 2));
      #1;
      par = 0; any = 0;
      for (int q = 0; q < NQ; q++) if (mask[q]) begin par ^= states[q]; any |= states[q]; end
      for (int q = 0; q < NQ; q++)
        exp[q] = (mode == 0) ? (states[q] & mask[q]) : (mode == 1) ? par : any;
      checks++;
      if (fb_data != exp || ctrl_bit != ((mode == 2) ? any : par)) begin
        failures++; $display("FAIL mode %0d", mode);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
