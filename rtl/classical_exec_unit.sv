// classical_exec_unit: program store and parser of one execution unit.
//
// Every qubit drive unit, qubit readout output unit and qubit readout input
// unit holds its own program (its qubit's share of the quantum circuit) and
// parses it here. GATE, WAIT and MEASURE are handed, decoded, to the quantum
// operation buffer, one per cycle while the buffer has room. BR raises the
// feedback interrupt: parsing stops until feedback data for this unit
// arrives; the bit is kept as rs and the unit jumps to PC+offset when rs
// equals imm, as the instruction set defines. A feedback word that arrives
// before BR is reached is held until BR consumes it.
//
// Own choices (the paper is silent): the program RAM lives here and is read
// asynchronously; a pass ends at STOP or after prog_len words, and the
// program is run `loops` times per start (one pass per shot); opcodes that do
// not belong to an execution unit (TRIGGER, FEEDBACK, NOP) are skipped.
//
// Timing: one instruction per cycle when not stalled; start restarts at PC 0
// on the next cycle. busy stays high until the last pass ends.
module classical_exec_unit
  import hima_pkg::*;
#(
  parameter int PROG_DEPTH = 1024
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // program load
  input  logic                          prog_we,
  input  logic [$clog2(PROG_DEPTH)-1:0] prog_waddr,
  input  instr_t                        prog_wdata,
  input  logic [15:0]                   prog_len,
  input  logic [15:0]                   loops,
  // control
  input  logic                          start,
  output logic                          busy,
  output logic                          br_wait,
  // feedback data from the dispatcher
  input  logic                          fb_valid,
  input  logic                          fb_bit,
  // quantum operation buffer
  output logic                          qop_push,
  output qop_t                          qop,
  input  logic                          qop_full
);
  localparam int AW = $clog2(PROG_DEPTH);

  instr_t        prog [PROG_DEPTH];
  logic [AW-1:0] pc;
  logic [15:0]   pass_cnt;
  logic          fb_pend, rs;
  instr_t        ir;
  opcode_e       op;
  logic          end_of_pass;

  always_ff @(posedge clk) begin
    if (prog_we) prog[prog_waddr] <= prog_wdata;
  end

  assign ir          = prog[pc];
  assign op          = opcode_e'(ir[31:28]);
  assign end_of_pass = (op == OP_STOP) || ({{(16-AW){1'b0}}, pc} >= prog_len);
  assign br_wait     = busy && !end_of_pass && (op == OP_BR) && !fb_pend;
  assign qop         = decode_qop(ir);
  assign qop_push    = busy && !end_of_pass && !qop_full &&
                       (op == OP_GATE || op == OP_WAIT || op == OP_MEASURE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pc       <= '0;
      busy     <= 1'b0;
      pass_cnt <= '0;
      fb_pend  <= 1'b0;
      rs       <= 1'b0;
    end else begin
      if (fb_valid) begin
        fb_pend <= 1'b1;
        rs      <= fb_bit;
      end
      if (start) begin
        pc       <= '0;
        busy     <= 1'b1;
        pass_cnt <= 16'd1;
        fb_pend  <= 1'b0;
      end else if (busy) begin
        if (end_of_pass) begin
          pc <= '0;
          if (pass_cnt >= loops) busy <= 1'b0;
          else pass_cnt <= pass_cnt + 1'b1;
        end else begin
          unique case (op)
            OP_GATE, OP_WAIT, OP_MEASURE: if (!qop_full) pc <= pc + 1'b1;
            OP_BR: if (fb_pend) begin
              fb_pend <= fb_valid;   // a word arriving now is kept for the next BR
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
