// tb_fast_command_generator: samples the serial output on the generator's
// own word boundaries and checks: IDLE when nothing is requested; an L1A
// request appears as exactly one L1A word; ECR likewise; with auto_bcr a BCR
// appears once every 3564 crossings, exactly one orbit apart; random L1As
// occur at roughly the set rate, with every word a legal IDLE or L1A code;
// and err_inject flips exactly the chosen bit.
module tb_fast_command_generator;
  import etroc_pkg::*;
  int checks = 0, failures = 0;
  logic bx_en;
  logic clk = 0, rst_n = 0, l1a_req = 0, ecr_req = 0, auto_bcr = 0, err_inject = 0, fc;
  logic [15:0] l1a_rate = 0, l1a_sent, bcr_sent;
  logic [2:0] err_pos = 0;
  logic [2:0] ph = 0;

  fast_command_generator dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) if (rst_n) ph <= ph + 3'd1;
  assign bx_en = rst_n && (ph == 3'd7);

  task automatic chk(logic cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  // words: the 8 bits after each bx_en
  logic [7:0] cur;
  logic [7:0] words [$];
  int bitn = -1;
  always @(posedge clk) begin
    if (bx_en) bitn <= 0;
    else if (bitn >= 0) bitn <= bitn + 1;
  end
  always @(negedge clk) begin
    if (bitn >= 0 && bitn < 8) begin
      cur = {cur[6:0], fc};
      if (bitn == 7) words.push_back(cur);
    end
  end

  function automatic int count_of(logic [7:0] w);
    int n = 0;
    foreach (words[i]) if (words[i] == w) n++;
    return n;
  endfunction

  task automatic run_bx(int n);
    repeat (n * 8) @(posedge clk);
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    run_bx(20);
    chk(count_of(FC_IDLE) == words.size() && words.size() >= 18, "IDLE only");
    words.delete();
    @(negedge clk); l1a_req = 1; @(negedge clk); l1a_req = 0;
    run_bx(10);
    chk(count_of(FC_L1A) == 1, "one L1A per request");
    @(negedge clk); ecr_req = 1; @(negedge clk); ecr_req = 0;
    run_bx(10);
    chk(count_of(FC_ECR) == 1, "one ECR per request");
    words.delete();
    auto_bcr = 1;
    run_bx(3 * ORBIT_BX + 10);
    chk(count_of(FC_BCR) == 3, $sformatf("BCR once per orbit (got %0d)", count_of(FC_BCR)));
    chk(bcr_sent == 16'd3, "bcr_sent counter");
    begin
      int last = -1, bad = 0;
      foreach (words[i]) if (words[i] == FC_BCR) begin
        if (last >= 0 && i - last != ORBIT_BX) bad++;
        last = i;
      end
      chk(bad == 0, "BCR spacing equals the orbit length");
    end
    auto_bcr = 0;
    words.delete();
    l1a_rate = 16'd6554;     // ~10%
    run_bx(4000);
    l1a_rate = 0;
    run_bx(2);
    chk(count_of(FC_L1A) > 300 && count_of(FC_L1A) < 500, $sformatf("random L1A rate (got %0d / 4000)", count_of(FC_L1A)));
    chk(l1a_sent == 16'(count_of(FC_L1A) + 1), "l1a_sent counter");
    // without requests, BCR or error injection every word is IDLE or L1A
    foreach (words[i]) chk(words[i] == FC_IDLE || words[i] == FC_L1A, $sformatf("legal word %h", words[i]));
    words.delete();
    err_inject = 1; err_pos = 3'd5;
    run_bx(10);
    err_inject = 0;
    chk(count_of(FC_IDLE ^ 8'h20) >= 9, "bit 5 flipped by error injection");
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
