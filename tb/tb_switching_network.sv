// tb_switching_network: random pending-pixel patterns on the full 16x16
// network. The expected winner is found from an independently written
// priority list: columns 8..15 then 7..0, inside a column row 0 first.
// Checks the output word, that only the winner sees own_read under grant,
// and that nobody is read without grant. Also drains a pattern one pixel per
// step and checks the order.
module tb_switching_network;
  import etroc_pkg::*;
  localparam int R = 16, C = 16;
  int checks = 0, failures = 0;
  logic grant, out_valid;
  logic own_valid [R][C];
  hit_t own_data  [R][C];
  logic own_read  [R][C];
  hit_t out_data;

  switching_network #(.N_ROWS(R), .N_COLS(C)) dut (.*);

  task automatic chk(logic cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  int col_order [C];
  initial begin
    for (int i = 0; i < C/2; i++) col_order[i] = C/2 + i;        // 8..15
    for (int i = 0; i < C/2; i++) col_order[C/2 + i] = C/2 - 1 - i; // 7..0
  end

  function automatic int winner();
    for (int k = 0; k < C; k++)
      for (int r = 0; r < R; r++)
        if (own_valid[r][col_order[k]]) return r * C + col_order[k];
    return -1;
  endfunction

  task automatic check_state();
    int w, nread;
    w = winner();
    #1;
    chk(out_valid == (w >= 0), "out_valid");
    if (w >= 0) chk(out_data == own_data[w / C][w % C], $sformatf("winner data r%0d c%0d", w / C, w % C));
    nread = 0;
    for (int r = 0; r < R; r++) for (int c = 0; c < C; c++) if (own_read[r][c]) nread++;
    if (grant && w >= 0) begin
      chk(nread == 1 && own_read[w / C][w % C], "exactly the winner is read");
    end else begin
      chk(nread == 0, "no read without grant or data");
    end
  endtask

  initial begin
    for (int r = 0; r < R; r++) for (int c = 0; c < C; c++) begin
      own_data[r][c] = '{row: 4'(r), col: 4'(c), toa: 10'($urandom), tot: 9'($urandom), cal: 10'($urandom)};
      own_valid[r][c] = 1'b0;
    end
    grant = 1'b1;
    check_state();
    // random patterns of different densities
    for (int t = 0; t < 300; t++) begin
      int dens;
      dens = $urandom_range(1, 40);
      for (int r = 0; r < R; r++) for (int c = 0; c < C; c++)
        own_valid[r][c] = ($urandom_range(0, 255) < dens);
      grant = ($urandom_range(0, 3) != 0);
      check_state();
    end
    // drain one pattern: order must follow the priority list
    grant = 1'b1;
    for (int r = 0; r < R; r++) for (int c = 0; c < C; c++) own_valid[r][c] = ($urandom_range(0, 7) == 0);
    own_valid[3][8] = 1'b1; own_valid[0][0] = 1'b1; own_valid[15][15] = 1'b1; own_valid[0][7] = 1'b1; own_valid[15][0] = 1'b1;
    begin
      int prev_rank, rank, w, steps;
      prev_rank = -1;
      steps = 0;
      // at most one step per pixel; a network that stops reading ends the loop
      while (winner() >= 0 && steps < R * C) begin
        steps++;
        w = winner();
        #1;
        rank = -1;
        for (int k = 0; k < C; k++) if (col_order[k] == w % C) rank = k * R + w / C;
        chk(rank > prev_rank, "drain order is strictly by priority");
        prev_rank = rank;
        chk(own_read[w / C][w % C], "the winner is read while draining");
        for (int r = 0; r < R; r++) for (int c = 0; c < C; c++) if (own_read[r][c]) own_valid[r][c] = 1'b0;
        own_valid[w / C][w % C] = 1'b0;
        #1;
      end
      chk(prev_rank == C * R - 1, "last drained is column 0 row 15");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
