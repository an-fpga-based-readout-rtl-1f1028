// l1a_event_buffer: per-pixel buffer of the words selected by L1A, plus the
// pixel's "already sent" flip-flop.
//
// Every accepted L1A writes one entry (hit or not) into every pixel, so all
// pixels' event buffers advance in lockstep and share the write and read
// pointers kept by the readout controller. The entry at rd_ptr is the oldest
// pending event. own_valid says that entry is a hit not yet sent; when the
// switching cell takes it (`read`) the sent flag is set, and `pop` (end of
// that event) clears it while the pointers move on.
//
// Timing: push, read and pop act at bx_en; own_valid/own_tdc follow the
// registered state combinationally.
//
// The event buffer per pixel, fed from the circular buffer on L1A, is
// published; shared pointers, the depth and the meaning of the pixel's
// flip-flop are this design's choice.
module l1a_event_buffer
  import etroc_pkg::*;
#(
  parameter int DEPTH = 8
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     bx_en,
  input  logic                     push,
  input  logic [$clog2(DEPTH)-1:0] wr_ptr,
  input  tdc_t                     din,
  input  logic                     pop,
  input  logic [$clog2(DEPTH)-1:0] rd_ptr,
  input  logic                     read,
  output logic                     own_valid,
  output tdc_t                     own_tdc
);

  tdc_t mem [DEPTH];
  logic sent;

  always_ff @(posedge clk) begin
    if (bx_en && push) mem[wr_ptr] <= din;
  end

  always_ff @(posedge clk) begin
    if (!rst_n)                sent <= 1'b0;
    else if (bx_en && pop)     sent <= 1'b0;
    else if (bx_en && read)    sent <= 1'b1;
  end

  assign own_tdc   = mem[rd_ptr];
  assign own_valid = own_tdc.dv && !sent;

endmodule
