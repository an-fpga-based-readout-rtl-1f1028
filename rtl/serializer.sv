// serializer: 8:1 parallel-to-serial converter for one 320 Mbps output.
//
// At clk with `load` (the bunch-crossing strobe) the 8-bit word is
// captured; `sout` then presents bit 7 first and one bit per clk, eight bits
// per crossing. In the emulator this is an FPGA serializer block; here it is
// a shift register.
module serializer #(
  parameter int W = 8
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         load,
  input  logic [W-1:0] word,
  output logic         sout
);

  logic [W-1:0] sr;

  always_ff @(posedge clk) begin
    if (!rst_n)    sr <= '0;
    else if (load) sr <= word;
    else           sr <= {sr[W-2:0], 1'b0};
  end

  assign sout = sr[W-1];

endmodule
