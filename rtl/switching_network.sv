// switching_network: merges the pending hits of all pixels into one stream,
// one pixel per bunch crossing.
//
// Each column is a chain of N_ROWS switching cells. Row 0 (bottom) is the
// downstream end and has the highest priority; row N_ROWS-1 the lowest. The
// column outputs are merged by a row chain of N_COLS-1 cells laid out as in
// the published block diagram (for 16 columns):
//   left half : cell 14 takes col 15 as upstream and col 14 as own data;
//               cells 13..8 take col 13..8 as own data, the next cell to
//               the left as upstream;
//   right half: cell 1 takes col 0 as upstream and col 1 as own data;
//               cells 2..7 take col 2..7 as own data, the next cell to the
//               right as upstream;
//   cell 0    : own input = left half (cell 8), upstream = right half (cell 7).
// The resulting priority is col 8, 9, ..., 15, then 7, 6, ..., 0: the column
// left of the centre first, the rightmost column last.
//
// Everything is combinational: when `grant` is high, out_valid/out_data give
// the highest-priority pending pixel and exactly that pixel sees own_read.
// N_COLS must be even and at least 4.
module switching_network
  import etroc_pkg::*;
#(
  parameter int N_ROWS = 16,
  parameter int N_COLS = 16
) (
  input  logic grant,
  input  logic own_valid [N_ROWS][N_COLS],
  input  hit_t own_data  [N_ROWS][N_COLS],
  output logic own_read  [N_ROWS][N_COLS],
  output logic out_valid,
  output hit_t out_data
);

  localparam int H = N_COLS / 2;   // columns per half

  // column chain outputs (row 0 cell) and the grant into each column
  logic col_valid [N_COLS];
  hit_t col_data  [N_COLS];
  logic col_gout  [N_COLS];

  // row chain: cell k output and the grant entering cell k
  logic rc_valid [N_COLS];
  hit_t rc_data  [N_COLS];
  logic rc_grant [N_COLS];
  logic rc_gup   [N_COLS];
  logic rc_gown  [N_COLS];

  // Each cell's outputs are declared in its own generate scope so that the
  // chain is a set of distinct nets rather than one array feeding itself.
  for (genvar c = 0; c < N_COLS; c++) begin : g_col
    for (genvar r = 0; r < N_ROWS; r++) begin : g_row
      logic dn_valid;
      hit_t dn_data;
      logic grant_up;
      logic up_valid, grant_in;
      hit_t up_data;
      if (r == N_ROWS - 1) begin : g_top
        assign up_valid = 1'b0;
        assign up_data  = '0;
      end else begin : g_below
        assign up_valid = g_row[r+1].dn_valid;
        assign up_data  = g_row[r+1].dn_data;
      end
      if (r == 0) begin : g_bottom
        assign grant_in = col_gout[c];
      end else begin : g_above
        assign grant_in = g_row[r-1].grant_up;
      end
      switching_cell u_cell (
        .own_valid(own_valid[r][c]), .own_data(own_data[r][c]),
        .up_valid, .up_data, .grant_in,
        .dn_valid, .dn_data, .grant_up, .own_read(own_read[r][c])
      );
    end
    assign col_valid[c] = g_row[0].dn_valid;
    assign col_data[c]  = g_row[0].dn_data;
  end

  // left half, cells H..N_COLS-2: own = column k, upstream = cell k+1 (column N_COLS-1 for the last)
  for (genvar k = H; k <= N_COLS - 2; k++) begin : g_left
    if (k == N_COLS - 2) begin : g_end
      switching_cell u_cell (
        .own_valid(col_valid[k]), .own_data(col_data[k]),
        .up_valid(col_valid[k+1]), .up_data(col_data[k+1]),
        .grant_in(rc_grant[k]),
        .dn_valid(rc_valid[k]), .dn_data(rc_data[k]),
        .grant_up(rc_gup[k]), .own_read(rc_gown[k])
      );
      assign col_gout[k+1] = rc_gup[k];
    end else begin : g_mid
      switching_cell u_cell (
        .own_valid(col_valid[k]), .own_data(col_data[k]),
        .up_valid(rc_valid[k+1]), .up_data(rc_data[k+1]),
        .grant_in(rc_grant[k]),
        .dn_valid(rc_valid[k]), .dn_data(rc_data[k]),
        .grant_up(rc_gup[k]), .own_read(rc_gown[k])
      );
      assign rc_grant[k+1] = rc_gup[k];
    end
    assign col_gout[k] = rc_gown[k];
  end

  // right half, cells 1..H-1: own = column k, upstream = cell k-1 (column 0 for cell 1)
  for (genvar k = 1; k <= H - 1; k++) begin : g_right
    if (k == 1) begin : g_end
      switching_cell u_cell (
        .own_valid(col_valid[1]), .own_data(col_data[1]),
        .up_valid(col_valid[0]), .up_data(col_data[0]),
        .grant_in(rc_grant[k]),
        .dn_valid(rc_valid[k]), .dn_data(rc_data[k]),
        .grant_up(rc_gup[k]), .own_read(rc_gown[k])
      );
      assign col_gout[0] = rc_gup[k];
    end else begin : g_mid
      switching_cell u_cell (
        .own_valid(col_valid[k]), .own_data(col_data[k]),
        .up_valid(rc_valid[k-1]), .up_data(rc_data[k-1]),
        .grant_in(rc_grant[k]),
        .dn_valid(rc_valid[k]), .dn_data(rc_data[k]),
        .grant_up(rc_gup[k]), .own_read(rc_gown[k])
      );
      assign rc_grant[k-1] = rc_gup[k];
    end
    assign col_gout[k] = rc_gown[k];
  end

  // centre cell 0: own = left half, upstream = right half
  switching_cell u_centre (
    .own_valid(rc_valid[H]), .own_data(rc_data[H]),
    .up_valid(rc_valid[H-1]), .up_data(rc_data[H-1]),
    .grant_in(grant),
    .dn_valid(rc_valid[0]), .dn_data(rc_data[0]),
    .grant_up(rc_gup[0]), .own_read(rc_gown[0])
  );
  assign rc_grant[H]   = rc_gown[0];
  assign rc_grant[H-1] = rc_gup[0];

  assign out_valid = rc_valid[0];
  assign out_data  = rc_data[0];

endmodule
