// sync_fifo: single-clock first-in first-out buffer.
//
// Used twice in every execution unit: as the quantum operation buffer, which
// lets the classical execution unit run ahead of waveform generation, and as
// the waveform FIFO, the boundary between instruction execution and the
// sample-exact timing of the DAC. The paper gives the role of both buffers;
// depth, width and the show-ahead read used here are this design's choice.
//
// Interface: push/wdata write when not full; pop removes the head shown on
// rdata (show-ahead, valid while !empty). count gives the fill level. A push
// and a pop may happen in the same cycle. Pushing when full or popping when
// empty is a caller error and is flagged by an assertion.
module sync_fifo #(
  parameter int WIDTH = 32,
  parameter int DEPTH = 16
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             push,
  input  logic [WIDTH-1:0] wdata,
  input  logic             pop,
  output logic [WIDTH-1:0] rdata,
  output logic             full,
  output logic             empty,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wptr, rptr;

  function automatic logic [AW-1:0] inc(input logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (push && !full) mem[wptr] <= wdata;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wptr  <= '0;
      rptr  <= '0;
      count <= '0;
    end else begin
      if (push && !full) wptr <= inc(wptr);
      if (pop && !empty) rptr <= inc(rptr);
      unique case ({push && !full, pop && !empty})
        2'b10:   count <= count + 1'b1;
        2'b01:   count <= count - 1'b1;
        default: count <= count;
      endcase
    end
  end

  assign rdata = mem[rptr];
  assign full  = (count == ($clog2(DEPTH+1))'(DEPTH));
  assign empty = (count == '0);

  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) !(push && full));
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) !(pop && empty));
endmodule
