// sync_fifo: synchronous first-in first-out buffer, used as the global data
// stream buffer between the switching network and the framer.
//
// push and pop act on the clk edge when `en` is high (the bunch-crossing
// strobe in this design). dout shows the oldest entry whenever !empty.
// A push when full or a pop when empty is ignored. count gives the fill
// level. The FIFO's role is published; its depth (16) is this design's
// choice.
module sync_fifo #(
  parameter int W     = 39,
  parameter int DEPTH = 16
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   en,
  input  logic                   push,
  input  logic [W-1:0]           din,
  input  logic                   pop,
  output logic [W-1:0]           dout,
  output logic                   empty,
  output logic                   full,
  output logic [$clog2(DEPTH):0] count
);

  localparam int AW = $clog2(DEPTH);

  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] wp, rp;

  logic do_push, do_pop;
  assign do_push = en && push && !full;
  assign do_pop  = en && pop && !empty;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wp    <= '0;
      rp    <= '0;
      count <= '0;
    end else begin
      if (do_push) wp <= wp + 1'b1;
      if (do_pop)  rp <= rp + 1'b1;
      count <= count + (AW+1)'(do_push) - (AW+1)'(do_pop);
    end
  end

  always_ff @(posedge clk) begin
    if (do_push) mem[wp] <= din;
  end

  assign dout  = mem[rp];
  assign empty = (count == 0);
  assign full  = (count == (AW+1)'(DEPTH));

endmodule
