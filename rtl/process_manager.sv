// process_manager: one process's view of an execution module.
//
// Holds the execution-unit mask of its process (which units of this module
// the process uses). A start command activates exactly those units; a
// synchronized trigger or a feedback strobe for the process is turned into
// per-unit strobes for those units. An execution module has one process
// manager per supported process, so several processes own disjoint units
// of the same module and run independently. The mask-based role is the
// paper's; register layout and the `busy` summary are this design's.
//
// Interface: mask_we/mask_wdata load the M-bit mask; start, trig, fb_valid
// are this process's strobes; unit_* are M-bit strobe vectors for the
// dispatcher. `ready` is high when every unit of the mask has been started
// and is still active (armed for its trigger); controllers use it before
// starting a shot. Timing: combinational from strobe to unit vector.
module process_manager #(
  parameter int M = 8
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         mask_we,
  input  logic [M-1:0] mask_wdata,
  output logic [M-1:0] mask,
  input  logic         start,
  input  logic         trig,
  input  logic         fb_valid,
  input  logic [M-1:0] unit_busy,
  output logic [M-1:0] unit_start,
  output logic [M-1:0] unit_trig,
  output logic [M-1:0] unit_fb,
  output logic         busy,
  output logic         ready
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)       mask <= '0;
    else if (mask_we) mask <= mask_wdata;
  end

  assign unit_start = start    ? mask : '0;
  assign unit_trig  = trig     ? mask : '0;
  assign unit_fb    = fb_valid ? mask : '0;
  assign busy       = |(unit_busy & mask);
  assign ready      = (unit_busy & mask) == mask;
endmodule
