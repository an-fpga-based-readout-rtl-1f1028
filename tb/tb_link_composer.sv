// tb_link_composer: a frame source answers `take` with numbered frames; the
// test collects the 8-n frame bits of every word and checks they form the
// frames back to back, that the first n bits of each word are the trigger
// bits, and that frames are consumed at (8-n)/40 per crossing. Runs n = 0,
// 1, 3 and 6, then PRBS mode, whose every bit must equal the XOR of the
// bits 7 and 6 before it.
module tb_link_composer;
  import etroc_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, bx_en = 0, prbs_en = 0, take;
  logic [2:0]  n_trig = 0;
  logic [15:0] trig = 0;
  logic [39:0] frame;
  logic [7:0]  word;

  link_composer dut (.*);

  always #5 clk = ~clk;

  task automatic chk(logic cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  function automatic logic [39:0] frame_of(int k);
    return {8'(k * 37 + 5), 32'(k * 32'h9E3779B9)};
  endfunction

  int fidx;
  assign frame = frame_of(fidx);

  logic bits [$];
  int ntake;

  initial begin
    int nlist [4] = '{0, 1, 3, 6};
    fidx = 0;
    repeat (3) @(posedge clk);
    foreach (nlist[k]) begin
      logic [15:0] tr_prev;
      int n, start_f, total_bits;
      n = nlist[k];
      rst_n = 0; fidx = 0; bits.delete(); ntake = 0;
      @(negedge clk); rst_n = 1;
      n_trig = 3'(n);
      for (int b = 0; b < 400; b++) begin
        logic took;
        @(negedge clk);
        trig = 16'($urandom);
        tr_prev = trig;
        bx_en = 1;
        #1 took = take;
        @(negedge clk);
        bx_en = 0;
        if (took) begin fidx++; ntake++; end
        for (int i = 0; i < n; i++) chk(word[7-i] == tr_prev[i], "trigger bit position");
        for (int i = 7 - n; i >= 0; i--) bits.push_back(word[i]);
      end
      // rebuild the frames
      total_bits = bits.size();
      for (int f = 0; f < total_bits / 40; f++) begin
        logic [39:0] got;
        for (int i = 0; i < 40; i++) got[39-i] = bits[f*40+i];
        chk(got == frame_of(f), $sformatf("n=%0d frame %0d got %h", n, f, got));
      end
      chk(ntake >= 400 * (8 - n) / 40 && ntake <= 400 * (8 - n) / 40 + 1,
          $sformatf("n=%0d frames taken %0d for 400 BX", n, ntake));
    end
    // PRBS mode
    begin
      logic [6:0] h;
      int cnt;
      prbs_en = 1;
      cnt = 0;
      for (int b = 0; b < 100; b++) begin
        @(negedge clk); bx_en = 1;
        #1 chk(!take, "no frame taken in PRBS mode");
        @(negedge clk); bx_en = 0;
        for (int i = 7; i >= 0; i--) begin
          if (cnt >= 7) chk(word[i] == (h[6] ^ h[5]), "PRBS7 recurrence");
          h = {h[5:0], word[i]};
          cnt++;
        end
      end
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
