// scrambler: self-synchronous scrambler x^58 + x^39 + 1 for the frame stream.
//
// Frames are scrambled 40 bits at a time in transmission order (bit 39
// first): s[n] = d[n] ^ s[n-39] ^ s[n-58]. `dout` is the scrambled form of
// `din` given the history of bits already sent; on bx_en && load the
// history takes in the 40 scrambled bits. With en low the frame passes
// unchanged (the history still follows the sent bits). A receiver can
// descramble with d[n] = s[n] ^ s[n-39] ^ s[n-58] without knowing the frame
// boundary. Scrambling is published; the polynomial is this design's choice.
module scrambler (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        bx_en,
  input  logic        en,
  input  logic        load,
  input  logic [39:0] din,
  output logic [39:0] dout
);

  logic [57:0] hist;    // hist[0] = last bit sent
  logic [57:0] hist_next;

  always_comb begin
    logic [57:0] h;
    logic        s;
    h = hist;
    for (int i = 39; i >= 0; i--) begin
      s       = en ? (din[i] ^ h[38] ^ h[57]) : din[i];
      dout[i] = s;
      h       = {h[56:0], s};
    end
    hist_next = h;
  end

  always_ff @(posedge clk) begin
    if (!rst_n)              hist <= '0;
    else if (bx_en && load)  hist <= hist_next;
  end

endmodule
