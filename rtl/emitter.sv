// emitter: sends triggers and feedback data to the downstream modules.
//
// A controller's configuration lookup table holds, per process, the mask of
// downstream ports (child controllers or execution modules) the process
// uses. A trigger or feedback strobe of process p goes out on exactly the
// ports in mask[p], so untouched boards never see the process. This is the
// paper's mask-per-process scheme of the hierarchical trigger mechanism.
// Feedback data: with SLICE = 1 (root and mid-layer controllers) child k
// receives qubits k*CQ..k*CQ+CQ-1 of the NQ-bit word; with SLICE = 0 (leaf
// controller) every module receives the whole word and each unit picks its
// bit. Slicing by qubit position is this design's choice.
//
// Readiness: `ready[p]` is high when every port in mask[p] reports process p
// ready on port_ready (combinational); a controller uses it to hold the
// initial trigger of a shot until all boards of the process are armed.
// Timing: one register stage.
module emitter #(
  parameter int N     = 32,
  parameter int K     = 3,
  parameter int NQ    = 72,
  parameter int CQ    = 24,
  parameter bit SLICE = 1'b1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          lut_we,
  input  logic [$clog2(N)-1:0] lut_waddr,
  input  logic [31:0]   lut_wdata,
  input  logic [N-1:0]  trig,
  input  logic [N-1:0]  fb_valid,
  input  logic [NQ-1:0] fb_data,
  output logic [N-1:0]  trig_out     [K],
  output logic [N-1:0]  fb_valid_out [K],
  output logic [CQ-1:0] fb_data_out  [K],
  input  logic [N-1:0]  port_ready   [K],
  output logic [N-1:0]  ready
);
  logic [K-1:0] mask [N];
  logic [CQ-1:0] fb_pick [K];

  for (genvar k = 0; k < K; k++) begin : g_pick
    if (SLICE) begin : g_slice
      assign fb_pick[k] = fb_data[k*CQ +: CQ];
    end else begin : g_whole
      assign fb_pick[k] = CQ'(fb_data);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int p = 0; p < N; p++) mask[p] <= '0;
    end else if (lut_we) begin
      mask[lut_waddr] <= lut_wdata[K-1:0];
    end
  end

  always_comb begin
    for (int p = 0; p < N; p++) begin
      ready[p] = 1'b1;
      for (int k = 0; k < K; k++)
        if (mask[p][k] && !port_ready[k][p]) ready[p] = 1'b0;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < K; k++) begin
        trig_out[k]     <= '0;
        fb_valid_out[k] <= '0;
        fb_data_out[k]  <= '0;
      end
    end else begin
      for (int k = 0; k < K; k++) begin
        for (int p = 0; p < N; p++) begin
          trig_out[k][p]     <= trig[p] && mask[p][k];
          fb_valid_out[k][p] <= fb_valid[p] && mask[p][k];
        end
        if (|fb_valid) fb_data_out[k] <= fb_pick[k];
      end
    end
  end
endmodule
