// tb_pixel: one pixel (row 9, col 3) in test-pattern mode with a random hit
// sequence. L1As are issued at random crossings; the word stored must be
// the one generated latency+1 crossings before the L1A (one crossing for
// the generator register, `latency` in the circular buffer). The head word
// is checked for hit flag, pixel address and pattern fields, and `read`
// must hide it until the event is popped.
module tb_pixel;
  import etroc_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, bx_en = 0, mode = 1, tp_hit = 0;
  logic [7:0] occupancy = 0;
  logic [8:0] latency = 9'd37;
  logic l1a_push = 0, ev_pop = 0, own_read = 0, own_valid, hit_now;
  logic [2:0] wr_ptr = 0, rd_ptr = 0;
  hit_t own_data;

  pixel #(.ROW(9), .COL(3), .CB_DEPTH(512), .EB_DEPTH(8)) dut (.*);

  always #5 clk = ~clk;

  task automatic chk(logic cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  logic hist [$];
  logic evq [$];
  int n_hit_events = 0;

  task automatic bx();
    @(negedge clk);
    tp_hit = 1'($urandom_range(0, 2) == 0);
    bx_en = 1;
    @(posedge clk);
    #1;
    hist.push_back(tp_hit);
    if (l1a_push) wr_ptr++;
    if (ev_pop) rd_ptr++;
    @(negedge clk);
    bx_en = 0; l1a_push = 0; ev_pop = 0; own_read = 0;
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (600) bx();
    for (int ev = 0; ev < 60; ev++) begin
      logic exp_hit;
      int idx;
      repeat ($urandom_range(0, 5)) bx();
      // L1A at the next crossing: that strobe is crossing hist.size()
      idx = hist.size() - int'(latency) - 1;
      exp_hit = hist[idx];
      l1a_push = 1;
      bx();
      #1;
      chk(own_valid == exp_hit, $sformatf("event %0d hit flag", ev));
      if (exp_hit) n_hit_events++;
      chk(own_data.row == 4'd9 && own_data.col == 4'd3, "pixel address");
      chk(own_data.toa == {4'd9, 4'd3, 2'b00} && own_data.tot == {1'b0, 4'd9, 4'd3} && own_data.cal == {2'b00, 4'd3, 4'd9},
          "test pattern fields");
      if (own_valid) begin
        own_read = 1;
        bx();
        #1 chk(!own_valid, "read hides the word");
      end
      ev_pop = 1;
      bx();
    end
    chk(hit_now == hist[$], "hit_now is the latest generated hit");
    chk(n_hit_events > 5 && n_hit_events < 55, "both hit and empty events seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
