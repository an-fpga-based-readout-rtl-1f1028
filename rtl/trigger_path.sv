// trigger_path: coarse hit map sent every bunch crossing for monitoring.
//
// The matrix is divided into 1, 2 (left/right halves, "2x1"), 4 (2x2
// quadrants) or 16 (4x4 blocks of 4x4 pixels) blocks, selected by `gran`
// (0..3). Block bit k is the OR of the current crossing's hits of the
// pixels in block k that are enabled in `mask` (bit row*N_COLS+col).
// Block numbering: halves bit0 = columns 0..N_COLS/2-1, bit1 = the rest;
// quadrants index {row half, column half}; 4x4 blocks {row/4, col/4}.
// In the beam gap (bcid >= gap_start) every trigger bit instead carries a
// "flashing" value that toggles once per orbit, giving the receiver a
// pattern to align to. `trig` is registered at bx_en.
//
// Granularities, the per-crossing map and flashing bits in the beam gap are
// published; the block numbering and the form of the flashing bit are this
// design's choice.
module trigger_path
  import etroc_pkg::*;
#(
  parameter int N_ROWS = 16,
  parameter int N_COLS = 16
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      bx_en,
  input  logic [N_ROWS*N_COLS-1:0]  hits,
  input  logic [N_ROWS*N_COLS-1:0]  mask,
  input  logic [1:0]                gran,
  input  logic [11:0]               bcid,
  input  logic [11:0]               gap_start,
  output logic [15:0]               trig,
  output logic                      in_gap
);

  logic [15:0] map;
  logic        flash;

  always_comb begin
    map = '0;
    for (int r = 0; r < N_ROWS; r++) begin
      for (int c = 0; c < N_COLS; c++) begin
        if (hits[r*N_COLS+c] && mask[r*N_COLS+c]) begin
          unique case (gran)
            2'd0: map[0] = 1'b1;
            2'd1: map[(c >= N_COLS/2) ? 1 : 0] = 1'b1;
            2'd2: map[((r >= N_ROWS/2) ? 2 : 0) + ((c >= N_COLS/2) ? 1 : 0)] = 1'b1;
            default: map[(r * 4 / N_ROWS) * 4 + (c * 4 / N_COLS)] = 1'b1;
          endcase
        end
      end
    end
  end

  assign in_gap = (bcid >= gap_start);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      trig  <= '0;
      flash <= 1'b0;
    end else if (bx_en) begin
      if (bcid == 12'(ORBIT_BX - 1)) flash <= ~flash;
      trig <= in_gap ? {16{flash}} : map;
    end
  end

endmodule
