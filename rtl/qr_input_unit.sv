// qr_input_unit: qubit readout input unit (one qubit on a shared feedline).
//
// Classical execution unit -> quantum operation buffer -> timing control
// unit -> data processing unit, after the paper's feedline figure. The unit
// keeps its own qubit's MEASURE/WAIT program, so each qubit on a feedline is
// measured on its own schedule (the paper's asynchronous measurement). The
// timing control unit pops one operation at a time: an operation with the
// trig flag waits for the synchronized trigger; WAIT dur counts dur cycles;
// MEASURE dur feeds dur broadcast feedline samples to the data processing
// unit. A measurement with the fb flag returns its state bit upward for
// feedback. BR in the program waits for feedback data, as in the drive unit.
//
// Configuration (already addressed to this unit): MEM_PROG program, MEM_WAVE
// discrimination kernel, MEM_REG prog_len, loops, fb_sel, threshold.
//
// Timing: with the trigger in cycle t, a trig-flagged MEASURE takes its
// first sample in cycle t+1; operations follow each other without gaps.
module qr_input_unit
  import hima_pkg::*;
#(
  parameter int PROG_DEPTH = 1024,
  parameter int KDEPTH     = 2048,
  parameter int QOP_DEPTH  = 16,
  parameter int ADC_W      = 11,
  parameter int FB_W       = 24
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    cfg_we,
  input  logic [2:0]              cfg_bank,
  input  logic [13:0]             cfg_word,
  input  logic [31:0]             cfg_data,
  input  logic                    start,
  input  logic                    trig,
  input  logic                    fb_valid,
  input  logic [FB_W-1:0]         fb_vec,
  input  logic signed [ADC_W-1:0] adc,
  output logic                    res_valid,
  output logic [1:0]              res_dtype,
  output logic [31:0]             res_data,
  output logic                    fbk_valid,
  output logic                    fbk_state,
  output logic                    busy,
  output logic                    measuring
);
  logic [15:0] prog_len, loops;
  logic signed [31:0] threshold;
  logic [$clog2(FB_W)-1:0] fb_sel;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      prog_len  <= '0;
      loops     <= 16'd1;
      fb_sel    <= '0;
      threshold <= '0;
    end else if (cfg_we && cfg_bank == MEM_REG) begin
      unique case (cfg_word)
        REG_PROG_LEN: prog_len  <= cfg_data[15:0];
        REG_LOOPS:    loops     <= cfg_data[15:0];
        REG_FB_SEL:   fb_sel    <= cfg_data[$clog2(FB_W)-1:0];
        REG_IDLE:     threshold <= cfg_data;
        default: ;
      endcase
    end
  end

  qop_t q_in, q_head, cur;
  logic q_push, q_pop, q_full, q_empty;
  logic ceu_busy, br_wait;

  classical_exec_unit #(.PROG_DEPTH(PROG_DEPTH)) u_ceu (
    .clk, .rst_n,
    .prog_we   (cfg_we && cfg_bank == MEM_PROG),
    .prog_waddr(cfg_word[$clog2(PROG_DEPTH)-1:0]),
    .prog_wdata(cfg_data),
    .prog_len, .loops,
    .start, .busy(ceu_busy), .br_wait,
    .fb_valid, .fb_bit(fb_vec[fb_sel]),
    .qop_push(q_push), .qop(q_in), .qop_full(q_full)
  );

  sync_fifo #(.WIDTH(QOP_W), .DEPTH(QOP_DEPTH)) u_qop_buf (
    .clk, .rst_n, .push(q_push), .wdata(q_in), .pop(q_pop), .rdata(q_head),
    .full(q_full), .empty(q_empty), .count()
  );

  // Timing control unit.
  logic        active, pend, go, last, load, drop;
  logic [15:0] rem;
  logic        first_s;

  assign go    = pend || trig;
  assign last  = active && (rem == 16'd1);
  // Load the next operation when idle or in the last cycle of the current one;
  // an operation flagged trig is loaded only once the trigger is there.
  // Zero-length operations are dropped from the buffer head.
  assign drop  = !q_empty && (q_head.dur == 16'd0);
  assign load  = !q_empty && (q_head.dur != 16'd0) && (!active || last) && (!q_head.trig || go);
  assign q_pop = drop || load;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active  <= 1'b0;
      pend    <= 1'b0;
      rem     <= '0;
      cur     <= '0;
      first_s <= 1'b0;
    end else begin
      pend <= go && !(load && q_head.trig);
      if (load) begin
        active  <= 1'b1;
        rem     <= q_head.dur;
        cur     <= q_head;
        first_s <= 1'b1;
      end else if (active) begin
        rem     <= rem - 1'b1;
        first_s <= 1'b0;
        if (last) active <= 1'b0;
      end
    end
  end

  assign measuring = active && (cur.op == OP_MEASURE);
  assign busy      = ceu_busy || active || !q_empty;

  readout_dpu #(.ADC_W(ADC_W), .KDEPTH(KDEPTH)) u_dpu (
    .clk, .rst_n,
    .k_we   (cfg_we && cfg_bank == MEM_WAVE),
    .k_waddr(cfg_word[$clog2(KDEPTH)-1:0]),
    .k_wdata(cfg_data[15:0]),
    .threshold,
    .acq(measuring), .first(first_s), .last(last), .dtype(cur.dtype), .fb(cur.fb),
    .adc,
    .res_valid, .res_dtype, .res_data,
    .fb_valid(fbk_valid), .fb_state(fbk_state)
  );
endmodule
