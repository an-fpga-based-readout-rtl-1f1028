// tb_circular_buffer: writes a random word every bunch crossing into the
// 512-entry ring and checks that the read port returns the word written
// exactly `latency` crossings earlier, for several latencies including the
// shortest (1) and the longest (511).
module tb_circular_buffer;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, bx_en = 0;
  logic [29:0] din, dout;
  logic [8:0]  latency;
  logic [29:0] hist [$];

  circular_buffer #(.DEPTH(512), .W(30)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    din = '0; latency = 9'd5;
    repeat (4) @(posedge clk);
    rst_n = 1;
    for (int bx = 0; bx < 3000; bx++) begin
      @(negedge clk);
      din   = 30'($urandom);
      if (bx % 500 == 0) begin
        if (bx / 500 == 1)      latency = 9'd1;
        else if (bx / 500 == 2) latency = 9'd511;
        else                    latency = 9'($urandom_range(1, 511));
      end
      bx_en = 1;
      #1;
      if (hist.size() >= int'(latency)) begin
        int idx;
        logic [29:0] exp_w;
        idx   = hist.size() - int'(latency);
        exp_w = hist[idx];
        checks++;
        if (dout != exp_w) begin
          failures++;
          $display("FAIL bx %0d latency %0d got %h exp %h", bx, latency, dout, exp_w);
        end
      end
      @(posedge clk);
      hist.push_back(din);
      @(negedge clk);
      bx_en = 0;
      repeat (6) @(posedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
