// hima_pkg: types and constants shared by the HiMA control-system RTL.
//
// Instruction word. Every execution unit and every task control processor
// runs 32-bit instructions taken from the HiMA instruction set: GATE, WAIT,
// MEASURE, TRIGGER, FEEDBACK and BR with the operands the instruction set
// names (addr, dur, trig, dtype, fb, start, rs, imm, offset). The bit layout
// below is this design's own choice:
//
//   [31:28] opcode
//   GATE     [27] trig  [26:16] addr (waveform LUT start)  [15:0] dur
//   WAIT     [27] trig                                     [15:0] dur
//   MEASURE  [27] trig  [26] fb  [25:24] dtype              [15:0] dur
//   TRIGGER  [27] trig  [26] start
//   FEEDBACK                                               [15:0] addr (entry)
//   BR       [27:24] rs  [23:16] imm                        [15:0] offset (signed)
//   STOP     end of the program pass (added: the instruction set has no end marker)
//
// Configuration bus. Programs, waveforms and lookup tables are written over
// one address/data write bus (cfg_t) that fans out down the hierarchy:
//
//   [31]    0 = root controller, 1 = a QCCS
//   [30:27] QCCS index
//   [26:23] execution module index inside the QCCS; 15 = the leaf controller
//   [22:17] unit index inside a module (63 = the module's own registers);
//           in a controller, the task control processor (process) index
//   [16:14] memory / register bank select (see the MEM_* constants)
//   [13:0]  word address
package hima_pkg;

  typedef enum logic [3:0] {
    OP_NOP      = 4'd0,
    OP_GATE     = 4'd1,
    OP_WAIT     = 4'd2,
    OP_MEASURE  = 4'd3,
    OP_TRIGGER  = 4'd4,
    OP_FEEDBACK = 4'd5,
    OP_BR       = 4'd6,
    OP_STOP     = 4'd15
  } opcode_e;

  typedef logic [31:0] instr_t;

  // Quantum operation: what the classical execution unit hands to the
  // quantum operation buffer.
  typedef struct packed {
    opcode_e     op;
    logic        trig;
    logic        fb;
    logic [1:0]  dtype;
    logic [10:0] addr;
    logic [15:0] dur;
  } qop_t;

  localparam int QOP_W = $bits(qop_t);

  // One DAC sample on its way through the waveform FIFO. trig marks the first
  // sample of an operation whose trig flag was set; idle marks a WAIT sample,
  // which the output switch replaces by the IDLE data LUT value.
  typedef struct packed {
    logic        trig;
    logic        idle;
    logic [15:0] data;
  } sample_t;

  localparam int SAMPLE_W = $bits(sample_t);

  // Readout data types of MEASURE (dtype).
  localparam logic [1:0] DT_STATE = 2'd0;
  localparam logic [1:0] DT_INTER = 2'd1;
  localparam logic [1:0] DT_RAW   = 2'd2;

  // Bank selects on the configuration bus.
  localparam logic [2:0] MEM_PROG  = 3'd0;  // program memory
  localparam logic [2:0] MEM_WAVE  = 3'd1;  // waveform LUT / discrimination kernel / feedback entry table
  localparam logic [2:0] MEM_REG   = 3'd2;  // unit registers
  localparam logic [2:0] MEM_STI   = 3'd3;  // controller: STI lookup table
  localparam logic [2:0] MEM_EMIT  = 3'd4;  // controller: emitter configuration LUT
  localparam logic [2:0] MEM_START = 3'd5;  // start a process (task scheduler / process manager)

  // Unit register map (bank MEM_REG).
  localparam logic [13:0] REG_PROG_LEN = 14'd0;  // instructions per program pass
  localparam logic [13:0] REG_LOOPS    = 14'd1;  // program passes (shots) per start
  localparam logic [13:0] REG_FB_SEL   = 14'd2;  // which feedback bit of the module this unit uses
  localparam logic [13:0] REG_IDLE     = 14'd3;  // IDLE data LUT value / discrimination threshold

  localparam int UNIT_CTRL = 63;  // unit index of a module's own registers
  localparam int MOD_LEAF  = 15;  // module index of the leaf controller

  typedef struct packed {
    logic        we;
    logic [31:0] addr;
    logic [31:0] data;
  } cfg_t;

  function automatic logic [2:0] addr_bank(input logic [31:0] a);
    return a[16:14];
  endfunction

  function automatic logic [5:0] addr_unit(input logic [31:0] a);
    return a[22:17];
  endfunction

  function automatic logic [13:0] addr_word(input logic [31:0] a);
    return a[13:0];
  endfunction

  // Configuration addresses: root controller (process p) and QCCS c /
  // module m / unit u. The leaf controller is module MOD_LEAF, a module's own
  // registers are unit UNIT_CTRL.
  function automatic logic [31:0] addr_root(input int p, input logic [2:0] bank, input int word);
    return {1'b0, 4'd0, 4'd0, 6'(p), bank, 14'(word)};
  endfunction
  function automatic logic [31:0] addr_qccs(input int c, input int m, input int u,
                                            input logic [2:0] bank, input int word);
    return {1'b1, 4'(c), 4'(m), 6'(u), bank, 14'(word)};
  endfunction

  // Decode of a program word into the quantum-operation format.
  function automatic qop_t decode_qop(input instr_t w);
    qop_t q;
    q.op    = opcode_e'(w[31:28]);
    q.trig  = w[27];
    q.fb    = w[26];
    q.dtype = w[25:24];
    q.addr  = w[26:16];
    q.dur   = w[15:0];
    return q;
  endfunction

  // Instruction builders, used by testbenches and program loaders.
  function automatic instr_t i_gate(input logic [10:0] addr, input logic [15:0] dur, input logic trig);
    return {OP_GATE, trig, addr, dur};
  endfunction
  function automatic instr_t i_wait(input logic [15:0] dur, input logic trig);
    return {OP_WAIT, trig, 11'd0, dur};
  endfunction
  function automatic instr_t i_measure(input logic [15:0] dur, input logic [1:0] dtype,
                                       input logic fb, input logic trig);
    return {OP_MEASURE, trig, fb, dtype, 8'd0, dur};
  endfunction
  function automatic instr_t i_trigger(input logic start, input logic trig);
    return {OP_TRIGGER, trig, start, 26'd0};
  endfunction
  function automatic instr_t i_feedback(input logic [15:0] addr);
    return {OP_FEEDBACK, 12'd0, addr};
  endfunction
  function automatic instr_t i_br(input logic [7:0] imm, input logic [15:0] offset);
    return {OP_BR, 4'd0, imm, offset};
  endfunction
  function automatic instr_t i_stop();
    return {OP_STOP, 28'd0};
  endfunction

endpackage
