// trigger_arbiter: trigger event arbitration and data transfer of a controller.
//
// Staggered triggering. Two processes triggered too close together can
// disturb each other through crosstalk. Each process p has a safety trigger
// interval STI[p] in a lookup table. An initial trigger of a shot
// (TRIGGER with start = 1) from process p is granted only when every other
// process q that is running has spent at least STI[p] cycles since its own
// last initial trigger (its task core counter); until then the request is
// held. This follows the paper's staggered-trigger description and figure.
// Triggers with start = 0 (mid-shot, after feedback) are granted at once.
// Own choices: at most one initial trigger is granted per cycle (lowest
// process index first), so two processes never start in the same cycle.
//
// Data transfer: feedback data requests of the task control processors are
// accepted one per cycle, lowest index first, and forwarded with a one-hot
// per-process valid.
//
// Timing: grant (ack) and the outgoing trigger bit are in the request cycle
// (combinational); `held` marks a start request stalled by an STI.
module trigger_arbiter #(
  parameter int N  = 32,
  parameter int NQ = 72
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          sti_we,
  input  logic [$clog2(N)-1:0] sti_waddr,
  input  logic [31:0]   sti_wdata,
  input  logic [N-1:0]  req,
  input  logic [N-1:0]  req_start,
  input  logic [31:0]   core_cnt [N],
  input  logic [N-1:0]  core_run,
  output logic [N-1:0]  ack,
  output logic [N-1:0]  trig_out,
  output logic [N-1:0]  held,
  input  logic [N-1:0]  fb_req,
  input  logic [NQ-1:0] fb_data_in [N],
  output logic [N-1:0]  fb_ack,
  output logic [N-1:0]  fb_valid,
  output logic [NQ-1:0] fb_data
);
  logic [31:0] sti [N];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int p = 0; p < N; p++) sti[p] <= '0;
    end else if (sti_we) begin
      sti[sti_waddr] <= sti_wdata;
    end
  end

  logic [N-1:0] ok;
  logic         granted_start;

  always_comb begin
    ack           = '0;
    held          = '0;
    granted_start = 1'b0;
    for (int p = 0; p < N; p++) begin
      ok[p] = 1'b1;
      for (int q = 0; q < N; q++)
        if (q != p && core_run[q] && core_cnt[q] < sti[p]) ok[p] = 1'b0;
      if (req[p]) begin
        if (!req_start[p]) ack[p] = 1'b1;
        else if (ok[p] && !granted_start) begin
          ack[p]        = 1'b1;
          granted_start = 1'b1;
        end else held[p] = 1'b1;
      end
    end
    trig_out = ack;
  end

  always_comb begin
    fb_ack  = '0;
    fb_data = '0;
    for (int p = N - 1; p >= 0; p--)
      if (fb_req[p]) begin
        fb_ack  = '0;
        fb_ack[p] = 1'b1;
        fb_data = fb_data_in[p];
      end
    fb_valid = fb_ack;
  end

  a_one_start: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(ack & req_start));
endmodule
