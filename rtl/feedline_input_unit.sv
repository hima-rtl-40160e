// feedline_input_unit: acquisition side of one feedline.
//
// The feedline ADC is sampled every cycle into a shared memory (a circular
// buffer) and the stored stream is broadcast to all K qubit readout input
// units of the feedline. Each input unit decides on its own, from its own
// program, when to integrate the stream, so qubits sharing a feedline are
// measured independently. Structure and K = 6 follow the paper; the ring
// buffer depth and the one-cycle store-then-broadcast path are this design's
// choice.
//
// Configuration: cfg_unit selects the input unit (0..K-1). Results come out
// per unit (res_*), and the fb-flagged state bits per unit (fbk_*).
// Timing: a sample on adc in cycle t reaches the input units in cycle t+1.
module feedline_input_unit
  import hima_pkg::*;
#(
  parameter int K          = 6,
  parameter int PROG_DEPTH = 1024,
  parameter int KDEPTH     = 2048,
  parameter int SHM_DEPTH  = 1024,
  parameter int ADC_W      = 11,
  parameter int FB_W       = 24
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    cfg_we,
  input  logic [5:0]              cfg_unit,
  input  logic [2:0]              cfg_bank,
  input  logic [13:0]             cfg_word,
  input  logic [31:0]             cfg_data,
  input  logic [K-1:0]            start,
  input  logic [K-1:0]            trig,
  input  logic [K-1:0]            fb_valid,
  input  logic [FB_W-1:0]         fb_vec,
  input  logic signed [ADC_W-1:0] adc,
  output logic [K-1:0]            res_valid,
  output logic [1:0]              res_dtype [K],
  output logic [31:0]             res_data  [K],
  output logic [K-1:0]            fbk_valid,
  output logic [K-1:0]            fbk_state,
  output logic [K-1:0]            busy,
  output logic [K-1:0]            measuring
);
  localparam int AW = $clog2(SHM_DEPTH);

  logic signed [ADC_W-1:0] shm [SHM_DEPTH];
  logic [AW-1:0] wptr, rptr;
  logic signed [ADC_W-1:0] bcast;

  always_ff @(posedge clk) shm[wptr] <= adc;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wptr <= '0;
      rptr <= '0;
    end else begin
      wptr <= wptr + 1'b1;
      rptr <= wptr;
    end
  end

  assign bcast = shm[rptr];

  for (genvar k = 0; k < K; k++) begin : g_qri
    qr_input_unit #(.PROG_DEPTH(PROG_DEPTH), .KDEPTH(KDEPTH), .ADC_W(ADC_W), .FB_W(FB_W)) u_qri (
      .clk, .rst_n,
      .cfg_we(cfg_we && cfg_unit == 6'(k)), .cfg_bank, .cfg_word, .cfg_data,
      .start(start[k]), .trig(trig[k]), .fb_valid(fb_valid[k]), .fb_vec,
      .adc(bcast),
      .res_valid(res_valid[k]), .res_dtype(res_dtype[k]), .res_data(res_data[k]),
      .fbk_valid(fbk_valid[k]), .fbk_state(fbk_state[k]),
      .busy(busy[k]), .measuring(measuring[k])
    );
  end
endmodule
