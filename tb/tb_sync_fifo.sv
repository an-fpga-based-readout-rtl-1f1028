// tb_sync_fifo: random push/pop traffic against a queue model, checking
// data order, empty, full and count, and that writes to a full FIFO and
// reads from an empty one are ignored.
module tb_sync_fifo;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, en = 0, push = 0, pop = 0, empty, full;
  logic [38:0] din = '0, dout;
  logic [4:0]  count;
  logic [38:0] q [$];

  sync_fifo #(.W(39), .DEPTH(16)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 4000; t++) begin
      int bias;
      bias = (t / 500) % 2 ? 70 : 30;
      @(negedge clk);
      en   = ($urandom_range(0, 3) != 0);
      push = ($urandom_range(0, 99) < bias);
      pop  = ($urandom_range(0, 99) < 100 - bias);
      din  = {$urandom, 7'($urandom)};
      #1;
      checks++;
      if (empty != (q.size() == 0) || full != (q.size() == 16) || count != 5'(q.size())) begin
        failures++; $display("FAIL flags t=%0d size=%0d count=%0d", t, q.size(), count);
      end
      if (q.size() > 0) begin
        checks++;
        if (dout != q[0]) begin failures++; $display("FAIL data"); end
      end
      @(posedge clk);
      if (en) begin
        logic was_full, was_empty;
        was_full = (q.size() == 16); was_empty = (q.size() == 0);
        if (pop && !was_empty) void'(q.pop_front());
        if (push && !was_full) q.push_back(din);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
