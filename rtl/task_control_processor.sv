// task_control_processor: the per-process engine of a controller.
//
// One task control processor runs one quantum process's controller program
// (WAIT, TRIGGER, FEEDBACK, BR), with the parts the paper draws:
//  - classical execution unit: program store, PC, BR on the controller's
//    own feedback decision bit (rs), STOP / prog_len ends a pass, `loops`
//    passes per start (this design's additions: the instruction set has no
//    end marker);
//  - timing control unit: WAIT dur counts dur cycles; TRIGGER start,trig
//    raises a trigger request to the trigger event arbitration and waits
//    for its acknowledge; TRIGGER with start = 1 is only requested once
//    `ready` says every board of the process is armed (the root starts a
//    shot only when all participants are prepared); an instruction with trig = 1 first waits for the
//    trigger of this process from the upper-layer controller;
//  - task core counter: cycles since this process's last initial (start = 1)
//    trigger, shared with the arbitration for staggered triggering;
//  - feedback interruption unit: FEEDBACK addr reads feedback entry addr
//    (qubit input mask, decision mode), waits until every masked qubit has
//    reported a feedback-flagged result, has the feedback decision unit
//    compute the feedback data, sends it through the data transfer
//    arbitration and ends the interrupt once it is accepted.
// Feedback entry table layout (this design's): entry e uses words 8e..8e+7;
// words 0..6 hold the NQ-bit input mask (32 bits each), word 7 the mode.
//
// Timing: one instruction per cycle except WAIT (dur cycles), TRIGGER (until
// acknowledged) and FEEDBACK (until results are in and the data is sent).
module task_control_processor
  import hima_pkg::*;
#(
  parameter int PROG_DEPTH = 1024,
  parameter int FB_ENTRIES = 16,
  parameter int NQ         = 72
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          prog_we,
  input  logic [$clog2(PROG_DEPTH)-1:0] prog_waddr,
  input  instr_t                        prog_wdata,
  input  logic                          fbt_we,
  input  logic [$clog2(FB_ENTRIES*8)-1:0] fbt_waddr,
  input  logic [31:0]                   fbt_wdata,
  input  logic [15:0]                   prog_len,
  input  logic [15:0]                   loops,
  input  logic                          start,
  output logic                          busy,
  input  logic                          up_trig,
  input  logic                          ready,
  // trigger event arbitration
  output logic                          trig_req,
  output logic                          trig_start,
  input  logic                          trig_ack,
  output logic [31:0]                   core_cnt,
  output logic                          core_run,
  // readout results of feedback-flagged measurements
  input  logic [NQ-1:0]                 res_valid,
  input  logic [NQ-1:0]                 res_state,
  // feedback data transfer
  output logic                          fb_req,
  output logic [NQ-1:0]                 fb_data,
  input  logic                          fb_ack,
  output logic                          in_feedback
);
  localparam int AW = $clog2(PROG_DEPTH);
  localparam int EW = $clog2(FB_ENTRIES);

  instr_t        prog [PROG_DEPTH];
  logic [31:0]   fbt  [FB_ENTRIES*8];
  logic [AW-1:0] pc;
  logic [15:0]   pass_cnt, wcnt;
  logic          waiting, up_pend, rs;
  logic [NQ-1:0] coll_v, coll_s;

  always_ff @(posedge clk) begin
    if (prog_we) prog[prog_waddr] <= prog_wdata;
    if (fbt_we)  fbt[fbt_waddr]   <= fbt_wdata;
  end

  instr_t  ir;
  opcode_e op;
  logic    end_of_pass, trig_ok;
  assign ir          = prog[pc];
  assign op          = opcode_e'(ir[31:28]);
  assign end_of_pass = (op == OP_STOP) || ({{(16-AW){1'b0}}, pc} >= prog_len);
  assign trig_ok     = !ir[27] || up_pend;

  // Feedback entry of the current FEEDBACK instruction.
  logic [EW-1:0]   ent;
  logic [NQ-1:0]   in_mask;
  logic [1:0]      mode;
  logic [32*7-1:0] mwords;
  logic            ctrl_bit, all_in;
  assign ent = ir[EW-1:0];
  always_comb begin
    for (int w = 0; w < 7; w++) mwords[32*w +: 32] = fbt[{ent, 3'(w)}];
  end
  assign in_mask = mwords[NQ-1:0];
  assign mode    = fbt[{ent, 3'd7}][1:0];
  assign all_in  = ((coll_v & in_mask) == in_mask);

  feedback_decision_unit #(.NQ(NQ)) u_fdu (
    .states(coll_s), .mask(in_mask), .mode, .fb_data, .ctrl_bit
  );

  logic exec;
  assign exec        = busy && !end_of_pass;
  assign trig_req    = exec && op == OP_TRIGGER && trig_ok && (!ir[26] || ready);
  assign trig_start  = ir[26];
  assign in_feedback = exec && op == OP_FEEDBACK;
  assign fb_req      = in_feedback && all_in;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pc       <= '0;
      busy     <= 1'b0;
      pass_cnt <= '0;
      wcnt     <= '0;
      waiting  <= 1'b0;
      up_pend  <= 1'b0;
      rs       <= 1'b0;
      core_cnt <= '0;
      core_run <= 1'b0;
      coll_v   <= '0;
      coll_s   <= '0;
    end else begin
      // task core counter
      if (trig_req && trig_ack && trig_start) core_cnt <= '0;
      else if (core_run && core_cnt != '1)    core_cnt <= core_cnt + 1'b1;
      if (trig_req && trig_ack && trig_start) core_run <= 1'b1;
      // result collection
      for (int q = 0; q < NQ; q++)
        if (res_valid[q]) begin
          coll_v[q] <= 1'b1;
          coll_s[q] <= res_state[q];
        end
      if (up_trig) up_pend <= 1'b1;

      if (start) begin
        pc       <= '0;
        busy     <= 1'b1;
        pass_cnt <= 16'd1;
        waiting  <= 1'b0;
        up_pend  <= up_trig;
        core_run <= 1'b0;
        coll_v   <= res_valid;
      end else if (busy) begin
        if (end_of_pass) begin
          pc <= '0;
          if (pass_cnt >= loops) begin
            busy     <= 1'b0;
            core_run <= 1'b0;
          end else pass_cnt <= pass_cnt + 1'b1;
        end else begin
          unique case (op)
            OP_WAIT: begin
              if (!waiting) begin
                if (trig_ok) begin
                  if (ir[27]) up_pend <= up_trig;
                  if (ir[15:0] <= 16'd1) pc <= pc + 1'b1;
                  else begin
                    waiting <= 1'b1;
                    wcnt    <= ir[15:0] - 16'd1;
                  end
                end
              end else if (wcnt == 16'd1) begin
                waiting <= 1'b0;
                pc      <= pc + 1'b1;
              end else wcnt <= wcnt - 1'b1;
            end
            OP_TRIGGER: if (trig_req && trig_ack) begin
              if (ir[27]) up_pend <= up_trig;
              pc <= pc + 1'b1;
            end
            OP_FEEDBACK: if (fb_req && fb_ack) begin
              rs     <= ctrl_bit;
              coll_v <= (coll_v & ~in_mask) | res_valid;
              pc     <= pc + 1'b1;
            end
            OP_BR: begin
              if ({7'd0, rs} == ir[23:16]) pc <= pc + AW'(ir[15:0]);
              else                         pc <= pc + 1'b1;
            end
            default: pc <= pc + 1'b1;
          endcase
        end
      end
    end
  end
endmodule
