// feedback_decision_unit: turns collected readout results into feedback data.
//
// Works on the qubit states a feedback entry selects (mask). It produces, in
// one cycle, the feedback word for every qubit below the controller and the
// controller's own decision bit (its BR register), as the paper's feedback
// flow requires ("feedback data of all qubits and the controller
// simultaneously"). The paper leaves the decision function open (from fast
// reset to syndrome interpretation); this design offers three simple ones,
// chosen per feedback entry:
//   mode 0  forward: each qubit receives its own measured state (fast reset)
//   mode 1  parity:  every qubit receives the parity of the masked states
//   mode 2  any:     every qubit receives the OR of the masked states
// The controller bit is the parity (mode 0/1) or the OR (mode 2).
// Purely combinational.
module feedback_decision_unit #(
  parameter int NQ = 72
) (
  input  logic [NQ-1:0] states,
  input  logic [NQ-1:0] mask,
  input  logic [1:0]    mode,
  output logic [NQ-1:0] fb_data,
  output logic          ctrl_bit
);
  logic [NQ-1:0] sel;
  logic          par, any;

  assign sel = states & mask;
  assign par = ^sel;
  assign any = |sel;

  always_comb begin
    unique case (mode)
      2'd1:    begin fb_data = {NQ{par}}; ctrl_bit = par; end
      2'd2:    begin fb_data = {NQ{any}}; ctrl_bit = any; end
      default: begin fb_data = sel;       ctrl_bit = par; end
    endcase
  end
endmodule
