// tb_frame_builder: feeds buffer records and checks the frames produced.
// Part 1 replays the two events of a logic-analyzer capture of the emulator
// output: header 3C5C15916F, data 9B9B84787F and 9C5C447968, trailer
// 6AF3400268 (two hits); header 3C5C15916F, data 8AAAA47989, trailer
// 6AF340017B (one hit); the frames must match bit for bit, including the
// CRC bytes 68 and 7B. Part 2 sends random events and checks each trailer
// against an independent bit-serial CRC-8 (x^8+x^5+x^3+x^2+x+1) and the hit
// count, and checks that an empty buffer yields fillers.
module tb_frame_builder;
  import etroc_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, bx_en = 0, take = 0;
  logic [16:0] chip_id = 17'h1ABCD;
  logic [2:0]  data_type = 3'b001;
  logic [11:0] bcid = 12'h185;
  logic        gsb_empty, gsb_pop;
  gsb_rec_t    gsb_rec;
  logic [39:0] frame;
  frame_kind_e frame_kind;
  gsb_rec_t    q [$];

  frame_builder dut (.*);

  always #5 clk = ~clk;

  assign gsb_empty = (q.size() == 0);
  assign gsb_rec   = (q.size() > 0) ? q[0] : '0;

  task automatic chk(logic cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  // take the current frame; return the next one
  task automatic next(output logic [39:0] f);
    logic popping;
    @(negedge clk); take = 1; bx_en = 1;
    #1 popping = gsb_pop;
    @(posedge clk); #1 if (popping) void'(q.pop_front());
    @(negedge clk); take = 0; bx_en = 0;
    f = frame;
  endtask

  function automatic logic [7:0] ref_crc(logic [7:0] c, logic [39:0] d, int n);
    for (int i = 39; i > 39 - n; i--) begin
      logic fb;
      fb = c[7] ^ d[i];
      c  = {c[6:0], 1'b0};
      if (fb) c = c ^ 8'b0010_1111;
    end
    return c;
  endfunction

  function automatic gsb_rec_t hdr(logic [2:0] t, logic [7:0] l1c, logic [11:0] b);
    return '{kind: REC_HEADER, payload: {14'b0, t, l1c, b}};
  endfunction
  function automatic gsb_rec_t hitrec(logic [39:0] f);
    return '{kind: REC_HIT, payload: f[36:0]};
  endfunction
  function automatic gsb_rec_t endrec(logic [7:0] n);
    return '{kind: REC_END, payload: {29'b0, n}};
  endfunction

  logic [39:0] f;
  logic [39:0] cap [7] = '{40'h3C5C15916F, 40'h9B9B84787F, 40'h9C5C447968, 40'h6AF3400268,
                           40'h3C5C15916F, 40'h8AAAA47989, 40'h6AF340017B};

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    // ---- part 1: captured events
    q.push_back(hdr(3'b001, 8'h59, 12'h16F));
    q.push_back(hitrec(cap[1]));
    q.push_back(hitrec(cap[2]));
    q.push_back(endrec(8'd2));
    q.push_back(hdr(3'b001, 8'h59, 12'h16F));
    q.push_back(hitrec(cap[5]));
    q.push_back(endrec(8'd1));
    for (int i = 0; i < 7; i++) begin
      next(f);
      chk(f == cap[i], $sformatf("captured frame %0d: got %h exp %h", i, f, cap[i]));
    end
    next(f);
    chk(f == 40'h3C5C959185, $sformatf("filler after event: %h", f));
    chk(classify(f) == FR_FILLER, "filler classified");
    // ---- part 2: random events
    for (int ev = 0; ev < 50; ev++) begin
      int nh;
      logic [7:0] c;
      logic [39:0] exp_f;
      nh = $urandom_range(0, 12);
      q.push_back(hdr(3'($urandom), 8'(ev), 12'($urandom)));
      for (int h = 0; h < nh; h++) q.push_back(hitrec({1'b1, 2'b00, 37'({$urandom, $urandom})}));
      q.push_back(endrec(8'(nh)));
      exp_f = 40'h0;
      next(f);
      chk(classify(f) == FR_HEADER && f[19:12] == 8'(ev), "random header");
      c = ref_crc(8'h00, f, 40);
      for (int h = 0; h < nh; h++) begin
        next(f);
        chk(classify(f) == FR_DATA, "data frame");
        c = ref_crc(c, f, 40);
      end
      next(f);
      c = ref_crc(c, f, 32);
      chk(classify(f) == FR_TRAILER, "trailer kind");
      chk(f[38:22] == chip_id && f[15:8] == 8'(nh), "trailer chip id and hit count");
      chk(f[7:0] == c, $sformatf("trailer CRC got %h exp %h", f[7:0], c));
      if (ev % 10 == 0) begin
        next(f);
        chk(classify(f) == FR_FILLER, "filler when buffer empty");
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
