// tb_trigger_path: random hit maps and masks at every granularity; the
// expected block bits are computed here from explicit block boundaries.
// Also checks that inside the beam gap all bits carry the flashing value
// and that it toggles from one orbit to the next.
module tb_trigger_path;
  import etroc_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, bx_en = 0, in_gap;
  logic [255:0] hits, mask;
  logic [1:0]  gran;
  logic [11:0] bcid, gap_start;
  logic [15:0] trig;

  trigger_path #(.N_ROWS(16), .N_COLS(16)) dut (.*);

  always #5 clk = ~clk;

  task automatic chk(logic cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  function automatic logic [15:0] expect_map();
    logic [15:0] m;
    m = '0;
    for (int r = 0; r < 16; r++) for (int c = 0; c < 16; c++) begin
      if (hits[r*16+c] & mask[r*16+c]) begin
        case (gran)
          0: m[0] = 1;
          1: if (c < 8) m[0] = 1; else m[1] = 1;
          2: m[(r < 8 ? 0 : 2) + (c < 8 ? 0 : 1)] = 1;
          3: m[(r / 4) * 4 + c / 4] = 1;
        endcase
      end
    end
    return m;
  endfunction

  task automatic bx();
    @(negedge clk); bx_en = 1;
    @(negedge clk); bx_en = 0;
  endtask

  logic [15:0] e;
  logic f1;
  initial begin
    gap_start = 12'd3445; bcid = 0; gran = 0; hits = '0; mask = '1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 400; t++) begin
      gran = 2'(t % 4);
      for (int k = 0; k < 8; k++) begin
        hits[k*32 +: 32] = $urandom & $urandom & $urandom & $urandom;
        mask[k*32 +: 32] = $urandom | $urandom;
      end
      if (t % 2 == 1) begin
        // sparse maps: one to three hit pixels, so that a region mix-up shows
        hits = '0;
        repeat ($urandom_range(1, 3)) hits[$urandom_range(0, 255)] = 1'b1;
        mask = '1;
      end
      if (t % 50 == 7) hits = '0;
      bcid = 12'($urandom_range(0, 3444));
      e = expect_map();
      bx();
      chk(trig == e, $sformatf("gran %0d map got %h exp %h", gran, trig, e));
    end
    // beam gap: flashing value, toggling each orbit
    hits = '1;
    bcid = 12'd3500; bx();
    chk(trig == {16{trig[0]}}, "gap: all bits flash together");
    f1 = trig[0];
    bcid = 12'(ORBIT_BX - 1); bx();
    bcid = 12'd3500; bx();
    chk(trig == {16{~f1}}, "flashing value toggles at the orbit boundary");
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
