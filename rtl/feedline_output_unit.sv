// feedline_output_unit: readout pulse generation for one feedline.
//
// K qubit readout output units (each a qubit_drive_unit with its own program
// and readout pulse waveforms) run independently; their sample streams are
// added by a multi-input adder into the single frequency-multiplexed stream
// sent to the feedline DAC. The paper gives this structure; K = 6 qubits per
// feedline is the paper's number, and saturation of the sum to 16 bits
// (two's complement samples) is this design's choice.
//
// Configuration: cfg_unit selects the output unit (0..K-1). Triggers, starts
// and feedback strobes arrive per unit from the module's dispatcher.
// Timing: the sum is registered, so dac_data lags the unit outputs by one
// cycle (two cycles after the trigger).
module feedline_output_unit
  import hima_pkg::*;
#(
  parameter int K          = 6,
  parameter int PROG_DEPTH = 1024,
  parameter int WAVE_DEPTH = 2048,
  parameter int FB_W       = 24
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            cfg_we,
  input  logic [5:0]      cfg_unit,
  input  logic [2:0]      cfg_bank,
  input  logic [13:0]     cfg_word,
  input  logic [31:0]     cfg_data,
  input  logic [K-1:0]    start,
  input  logic [K-1:0]    trig,
  input  logic [K-1:0]    fb_valid,
  input  logic [FB_W-1:0] fb_vec,
  output logic [15:0]     dac_data,
  output logic [K-1:0]    busy,
  output logic [K-1:0]    released
);
  logic [15:0] u_dac [K];
  logic [K-1:0] played, br_wait;

  for (genvar k = 0; k < K; k++) begin : g_qro
    qubit_drive_unit #(.PROG_DEPTH(PROG_DEPTH), .WAVE_DEPTH(WAVE_DEPTH), .FB_W(FB_W)) u_qro (
      .clk, .rst_n,
      .cfg_we(cfg_we && cfg_unit == 6'(k)), .cfg_bank, .cfg_word, .cfg_data,
      .start(start[k]), .trig(trig[k]), .fb_valid(fb_valid[k]), .fb_vec,
      .dac_data(u_dac[k]), .played(played[k]), .released(released[k]),
      .busy(busy[k]), .br_wait(br_wait[k])
    );
  end

  logic signed [15+$clog2(K+1):0] sum;
  always_comb begin
    sum = '0;
    for (int k = 0; k < K; k++) sum += (16+$clog2(K+1))'($signed(u_dac[k]));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) dac_data <= '0;
    else if (sum > 32767)  dac_data <= 16'h7fff;
    else if (sum < -32768) dac_data <= 16'h8000;
    else                   dac_data <= sum[15:0];
  end
endmodule
