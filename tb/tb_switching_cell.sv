// tb_switching_cell: exhaustive check of the switching cell's four outputs
// for every combination of own/upstream presence and downstream grant,
// with random data words.
module tb_switching_cell;
  import etroc_pkg::*;
  int checks = 0, failures = 0;
  logic own_valid, up_valid, grant_in, dn_valid, grant_up, own_read;
  hit_t own_data, up_data, dn_data;

  switching_cell dut (.*);

  task automatic chk(logic cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    for (int rep = 0; rep < 20; rep++) begin
      for (int v = 0; v < 8; v++) begin
        {own_valid, up_valid, grant_in} = 3'(v);
        own_data = hit_t'({$urandom, $urandom});
        up_data  = hit_t'({$urandom, $urandom});
        #1;
        chk(dn_valid == (own_valid || up_valid), "dn_valid");
        if (own_valid)     chk(dn_data == own_data, "own data has priority");
        else if (up_valid) chk(dn_data == up_data, "upstream passes through empty cell");
        chk(grant_up == (grant_in && !own_valid), "grant blocked by non-empty cell");
        chk(own_read == (grant_in && own_valid), "own_read");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
