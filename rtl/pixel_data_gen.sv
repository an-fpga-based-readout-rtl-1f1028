// pixel_data_gen: the data source of one emulated pixel, standing in for the
// pre-amplifier, discriminator and TDC of the ASIC.
//
// Every bunch crossing (bx_en) it produces a TDC word {dv, toa, tot, cal}
// with the published widths (10-bit TOA, 9-bit TOT, 10-bit calibration code,
// data-valid bit). A multiplexer selects between two sources:
//   mode 0, dummy TDC data: a 32-bit Galois LFSR seeded from the pixel
//          address; the pixel is hit when 8 random bits are below
//          `occupancy`, and TOA/TOT/CAL are further random bits.
//   mode 1, test pattern: hit when `tp_hit` is set; TOA = {row,col,2'b00},
//          TOT = {1'b0,row,col}, CAL = {2'b00,col,row}.
// The two sources and the multiplexer are published; their contents are
// this design's choice. `tdc` is registered and changes right after bx_en.
module pixel_data_gen
  import etroc_pkg::*;
#(
  parameter int unsigned ROW = 0,
  parameter int unsigned COL = 0
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       bx_en,
  input  logic       mode,
  input  logic [7:0] occupancy,
  input  logic       tp_hit,
  output tdc_t       tdc
);

  localparam logic [3:0]  R    = 4'(ROW);
  localparam logic [3:0]  C    = 4'(COL);
  localparam logic [31:0] SEED = 32'hACE1_0001 ^ {16'(ROW * 16 + COL), 16'(COL * 977 + ROW * 131 + 1)};
  localparam logic [31:0] TAPS = 32'h8020_0003;   // x^32 + x^22 + x^2 + x + 1

  logic [31:0] lfsr;

  // advance the LFSR 32 steps so every BX sees fresh bits
  function automatic logic [31:0] lfsr_next(logic [31:0] s);
    logic [31:0] v;
    v = s;
    for (int i = 0; i < 32; i++) v = v[0] ? ((v >> 1) ^ TAPS) : (v >> 1);
    return v;
  endfunction

  tdc_t dummy, pattern;
  always_comb begin
    dummy.dv  = (lfsr[7:0] < occupancy);
    dummy.toa = lfsr[17:8];
    dummy.tot = lfsr[26:18];
    dummy.cal = {lfsr[31:27], lfsr[4:0]};
    pattern.dv  = tp_hit;
    pattern.toa = {R, C, 2'b00};
    pattern.tot = {1'b0, R, C};
    pattern.cal = {2'b00, C, R};
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      lfsr <= SEED;
      tdc  <= '0;
    end else if (bx_en) begin
      lfsr <= lfsr_next(lfsr);
      tdc  <= mode ? pattern : dummy;
    end
  end

endmodule
