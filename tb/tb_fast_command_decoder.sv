// tb_fast_command_decoder: sends IDLE words at a random bit offset, then a
// random command sequence, MSB first. Checks that the decoder locks, that
// every command is decoded in order, that words with one flipped bit are
// corrected (and flagged), that words with two flipped bits are flagged as
// errors and dropped, and that a burst of garbage loses the lock, after
// which the decoder locks again.
module tb_fast_command_decoder;
  import etroc_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, fc_bit = 0;
  logic cmd_valid, corrected, error, locked;
  fast_cmd_e cmd;

  fast_command_decoder #(.LOCK_GOOD(4), .UNLOCK_BAD(4)) dut (.*);

  always #5 clk = ~clk;

  task automatic chk(logic cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  fast_cmd_e exp_q [$];
  int n_corr = 0, n_err = 0, n_dec = 0;
  logic expect_on = 0;

  task automatic send(logic [7:0] w);
    for (int i = 7; i >= 0; i--) begin
      @(negedge clk); fc_bit = w[i];
    end
  endtask

  always @(posedge clk) begin
    if (corrected && rst_n) n_corr++;
    if (error && rst_n) n_err++;
    if (cmd_valid && expect_on) begin
      n_dec++;
      checks++;
      if (exp_q.size() == 0 || cmd != exp_q[0]) begin
        failures++;
        $display("FAIL decoded %s, expected %s", cmd.name(), exp_q.size() ? exp_q[0].name() : "none");
      end
      if (exp_q.size()) void'(exp_q.pop_front());
    end
  end

  fast_cmd_e codes [4] = '{FC_IDLE, FC_L1A, FC_BCR, FC_ECR};

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat ($urandom_range(1, 7)) begin @(negedge clk); fc_bit = 1'($urandom); end
    repeat (10) send(FC_IDLE);
    chk(locked, "locked after IDLE training");
    expect_on = 1;
    exp_q.push_back(FC_IDLE);     // the last training word is still in flight
    repeat (2) begin send(FC_IDLE); exp_q.push_back(FC_IDLE); end
    // clean commands
    for (int i = 0; i < 200; i++) begin
      fast_cmd_e c;
      c = codes[$urandom_range(0, 3)];
      exp_q.push_back(c);
      send(c);
    end
    // single-bit flips: corrected
    for (int i = 0; i < 50; i++) begin
      fast_cmd_e c;
      c = codes[$urandom_range(0, 3)];
      exp_q.push_back(c);
      send(c ^ (8'h01 << $urandom_range(0, 7)));
    end
    send(FC_IDLE); exp_q.push_back(FC_IDLE);
    send(FC_IDLE); exp_q.push_back(FC_IDLE);
    chk(n_corr == 50, $sformatf("50 single-bit flips corrected (got %0d)", n_corr));
    chk(exp_q.size() <= 1, "all commands decoded (last one in flight)");
    // two-bit flips: detected, not decoded
    for (int i = 0; i < 3; i++) begin
      send(FC_L1A ^ 8'h81);
      send(FC_IDLE); exp_q.push_back(FC_IDLE);
    end
    send(FC_IDLE); exp_q.push_back(FC_IDLE);
    chk(n_err == 3, $sformatf("3 double-bit errors flagged (got %0d)", n_err));
    chk(exp_q.size() <= 1 && locked, "lock kept through isolated errors");
    // lose lock, then relock at a new offset
    expect_on = 0;
    repeat (6) send(8'h00 ^ 8'hC3);
    chk(!locked, "lock lost after repeated bad words");
    repeat (3) begin @(negedge clk); fc_bit = 0; end
    repeat (10) send(FC_IDLE);
    chk(locked, "relocked at the new boundary");
    chk(n_dec + exp_q.size() == 259, $sformatf("decoded count %0d", n_dec));
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
