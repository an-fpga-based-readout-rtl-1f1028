// tb_scrambler: scrambles a sequence of frames and descrambles the sent
// bits with an independent bit-serial descrambler
// d[n] = s[n] ^ s[n-39] ^ s[n-58]. Checks exact recovery, that scrambling
// changes the bits, and that with en low the frames pass unchanged.
module tb_scrambler;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, bx_en = 0, en = 1, load = 0;
  logic [39:0] din = 0, dout;
  logic [57:0] rx;     // receiver history, rx[0] newest
  int ndiff;

  scrambler dut (.*);

  always #5 clk = ~clk;

  initial begin
    rx = '0;
    ndiff = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int f = 0; f < 300; f++) begin
      logic [39:0] rec;
      @(negedge clk);
      en   = (f < 200);
      din  = (f % 3 == 0) ? 40'h3C5C800000 : {8'($urandom), $urandom};
      load = 1; bx_en = 1;
      #1;
      for (int i = 39; i >= 0; i--) begin
        rec[i] = en ? (dout[i] ^ rx[38] ^ rx[57]) : dout[i];
        rx = {rx[56:0], dout[i]};
      end
      checks++;
      if (rec != din) begin failures++; $display("FAIL frame %0d", f); end
      if (en && dout != din) ndiff++;
      if (!en) begin
        checks++;
        if (dout != din) begin failures++; $display("FAIL bypass %0d", f); end
      end
      @(negedge clk);
      load = 0; bx_en = 0;
    end
    checks++;
    if (ndiff < 190) begin failures++; $display("FAIL scrambling changed only %0d frames", ndiff); end
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
