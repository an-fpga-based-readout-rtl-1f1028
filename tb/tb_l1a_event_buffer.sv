// tb_l1a_event_buffer: drives the shared pointers as the readout controller
// would. Stores a random mix of hit and empty words, then for each event
// checks that the head word is shown, that own_valid is set only for an
// unsent hit, that `read` clears own_valid until `pop`, and that pop moves
// to the next event.
module tb_l1a_event_buffer;
  import etroc_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, bx_en = 0;
  logic push = 0, pop = 0, read = 0, own_valid;
  logic [2:0] wr_ptr = 0, rd_ptr = 0;
  tdc_t din, own_tdc;
  tdc_t model [$];

  l1a_event_buffer #(.DEPTH(8)) dut (.*);

  always #5 clk = ~clk;

  task automatic chk(logic cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic bx();
    @(negedge clk); bx_en = 1;
    @(negedge clk); bx_en = 0; push = 0; pop = 0; read = 0;
  endtask

  initial begin
    din = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int round = 0; round < 20; round++) begin
      int n;
      n = $urandom_range(1, 8);
      for (int i = 0; i < n; i++) begin
        din = tdc_t'({1'($urandom_range(0, 1)), 29'($urandom)});
        push = 1;
        model.push_back(din);
        bx();
        wr_ptr = wr_ptr + 1;
      end
      while (model.size() > 0) begin
        #1;
        chk(own_tdc == model[0], "head word");
        chk(own_valid == model[0].dv, "own_valid equals dv of unsent head");
        if (model[0].dv) begin
          read = 1; bx();
          chk(!own_valid, "sent flag hides the word");
          bx();
          chk(!own_valid, "stays hidden until pop");
        end
        pop = 1; bx();
        rd_ptr = rd_ptr + 1;
        void'(model.pop_front());
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
