// circular_buffer: per-pixel ring of TDC words, one entry per bunch crossing.
//
// On every bx_en the word `din` is written at the write pointer, which then
// advances. `dout` is read asynchronously from `latency` entries behind the
// write pointer: at the bx_en that writes crossing t, `dout` holds the word
// of crossing t - latency, which is what an L1A issued for crossing
// t - latency must pick up. `latency` must lie in 1..DEPTH-1.
//
// The circular buffer and its purpose are published; the depth (512, enough
// for a 12.5 us trigger latency) and the asynchronous read are this design's
// choice.
module circular_buffer
  import etroc_pkg::*;
#(
  parameter int DEPTH = 512,
  parameter int W     = 30
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     bx_en,
  input  logic [W-1:0]             din,
  input  logic [$clog2(DEPTH)-1:0] latency,
  output logic [W-1:0]             dout
);

  localparam int AW = $clog2(DEPTH);

  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] wptr;

  always_ff @(posedge clk) begin
    if (!rst_n) wptr <= '0;
    else if (bx_en) wptr <= wptr + 1'b1;
  end

  always_ff @(posedge clk) begin
    if (bx_en) mem[wptr] <= din;
  end

  assign dout = mem[wptr - latency];

endmodule
