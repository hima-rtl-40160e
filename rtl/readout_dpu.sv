// readout_dpu: data processing unit of a qubit readout input unit.
//
// While `acq` is high the unit takes one broadcast feedline sample per cycle
// and accumulates it weighted by the qubit's state-discrimination waveform
// (kernel memory, one weight per sample of the measurement window). At the
// end of the window it reports, as MEASURE's dtype selects, the qubit state
// (accumulator above the threshold: 1), the accumulator itself (intermediate
// result) or, for raw data, every input sample as it arrives. The state bit
// of a measurement with the fb flag is also sent toward the controller.
//
// The paper says only that the unit processes the input data in real time to
// get the readout result and lists the three output types; the single-
// quadrature weighted integration and threshold are this design's choice.
//
// Timing: `first` marks the first sample of a window; results of dtype 0/1
// appear the cycle after the window's last sample (res_valid, and fb_valid
// when fb is set).
module readout_dpu
  import hima_pkg::*;
#(
  parameter int ADC_W  = 11,
  parameter int KDEPTH = 2048
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      k_we,
  input  logic [$clog2(KDEPTH)-1:0] k_waddr,
  input  logic [15:0]               k_wdata,
  input  logic signed [31:0]        threshold,
  input  logic                      acq,
  input  logic                      first,
  input  logic                      last,
  input  logic [1:0]                dtype,
  input  logic                      fb,
  input  logic signed [ADC_W-1:0]   adc,
  output logic                      res_valid,
  output logic [1:0]                res_dtype,
  output logic [31:0]               res_data,
  output logic                      fb_valid,
  output logic                      fb_state
);
  logic signed [15:0] kernel [KDEPTH];
  logic [$clog2(KDEPTH)-1:0] idx;
  logic signed [31:0] acc, acc_next;

  always_ff @(posedge clk) begin
    if (k_we) kernel[k_waddr] <= k_wdata;
  end

  assign acc_next = (first ? 32'sd0 : acc) + 32'(adc * kernel[first ? '0 : idx]);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc       <= '0;
      idx       <= '0;
      res_valid <= 1'b0;
      res_dtype <= '0;
      res_data  <= '0;
      fb_valid  <= 1'b0;
      fb_state  <= 1'b0;
    end else begin
      res_valid <= 1'b0;
      fb_valid  <= 1'b0;
      if (acq) begin
        acc <= acc_next;
        idx <= (first ? '0 : idx) + 1'b1;
        if (dtype == DT_RAW) begin
          res_valid <= 1'b1;
          res_dtype <= DT_RAW;
          res_data  <= 32'(adc);
        end else if (last) begin
          res_valid <= 1'b1;
          res_dtype <= dtype;
          res_data  <= (dtype == DT_STATE) ? {31'd0, acc_next > threshold} : acc_next;
        end
        if (last && fb) begin
          fb_valid <= 1'b1;
          fb_state <= acc_next > threshold;
        end
      end
    end
  end
endmodule
