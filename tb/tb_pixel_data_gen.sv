// tb_pixel_data_gen: checks the test-pattern words of a pixel at address
// (row 5, col 11) against the documented formula, that the hit follows
// tp_hit, and in dummy mode that occupancy 0 gives no hits, 256/256-1 gives
// nearly all, 64/256 gives about a quarter, and the TDC fields vary.
module tb_pixel_data_gen;
  import etroc_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, bx_en = 0, mode = 1, tp_hit = 0;
  logic [7:0] occupancy = 0;
  tdc_t tdc;

  pixel_data_gen #(.ROW(5), .COL(11)) dut (.*);

  always #5 clk = ~clk;

  task automatic chk(logic cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic bx();
    @(negedge clk); bx_en = 1;
    @(negedge clk); bx_en = 0;
  endtask

  logic [7:0] occupancy_list [3] = '{8'd0, 8'd255, 8'd64};
  int nhit;
  logic [9:0] first_toa;
  logic toa_varies;

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 20; i++) begin
      tp_hit = 1'($urandom_range(0, 1));
      bx();
      chk(tdc.dv == tp_hit, "test pattern hit follows tp_hit");
      chk(tdc.toa == 10'b0101_1011_00, "test pattern TOA = {row,col,00}");
      chk(tdc.tot == 9'b0_0101_1011, "test pattern TOT = {0,row,col}");
      chk(tdc.cal == 10'b00_1011_0101, "test pattern CAL = {00,col,row}");
    end
    mode = 0;
    foreach (occupancy_list[k]) begin
      occupancy = occupancy_list[k];
      nhit = 0;
      toa_varies = 0;
      for (int i = 0; i < 2000; i++) begin
        bx();
        if (i == 0) first_toa = tdc.toa;
        else if (tdc.toa != first_toa) toa_varies = 1;
        nhit += int'(tdc.dv);
      end
      case (occupancy)
        8'd0:   chk(nhit == 0, "occupancy 0 gives no hits");
        8'd255: chk(nhit > 1900, "occupancy 255 gives almost always hits");
        default: chk(nhit > 400 && nhit < 600, $sformatf("occupancy 64 gives ~500 hits of 2000 (got %0d)", nhit));
      endcase
      chk(toa_varies, "dummy TOA varies");
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
