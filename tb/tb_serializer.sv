// tb_serializer: loads a random word every 8 clk and checks that the serial
// output presents its bits MSB first, one per clk, in the 8 clk after load.
module tb_serializer;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, load = 0, sout;
  logic [7:0] word = 0, prev;

  serializer #(.W(8)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int w = 0; w < 200; w++) begin
      @(negedge clk);
      word = 8'($urandom);
      load = 1;
      @(negedge clk);
      load = 0;
      prev = word;
      for (int b = 7; b >= 0; b--) begin
        checks++;
        if (sout != prev[b]) begin failures++; $display("FAIL word %0d bit %0d", w, b); end
        if (b != 0) @(negedge clk);
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
