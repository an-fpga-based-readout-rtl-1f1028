// tb_data_checker: the test builds its own 320 Mbps stream: 40-bit frames
// (events with CRC-8/0x2F computed here, fillers in between), scrambled
// with x^58+x^39+1, one trigger bit + 7 frame bits per crossing, sent with
// a 3-bit line delay so the checker must slip its word boundary. After
// lock it sends a known run of events including one with a corrupted data
// bit (CRC error) and one with a doubled header (format error) and checks
// the counter deltas, the recovered frames and the trigger bits. Finally a
// PRBS 2^7-1 stream with one flipped bit must give exactly 3 PRBS errors
// (the flipped bit and the two later bits computed from it).
module tb_data_checker;
  import etroc_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, din = 0, descramble_en = 1, prbs_en = 0;
  logic [2:0]  n_trig = 3'd1;
  logic [16:0] chip_id = 17'h1ABCD;
  logic [39:0] word;
  logic        word_dv, trig_valid;
  frame_kind_e word_kind;
  logic [5:0]  trig;
  checker_cnt_t cnt;

  data_checker #(.LOCK_N(4), .SLIP_BX(2048)) dut (.*);

  always #5 clk = ~clk;

  task automatic chk(logic cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  function automatic logic [7:0] crc_bits(logic [7:0] c, logic [39:0] d, int n);
    for (int i = 39; i > 39 - n; i--) begin
      logic fb;
      fb = c[7] ^ d[i];
      c  = {c[6:0], 1'b0};
      if (fb) c = c ^ 8'h2F;
    end
    return c;
  endfunction

  // ---------------- transmitter model
  logic [39:0] frame_q [$];      // frames waiting to be sent
  logic        bitq [$];         // unscrambled frame bits
  logic [57:0] sh = '0;          // scrambler history
  logic        line [$];         // serial bits
  logic [39:0] sent_frames [$];  // non-filler frames in send order
  logic        trig_sent [$];
  int          trig_idx = 0;
  logic        send_prbs = 0;
  logic [6:0]  prbs = 7'h7F;
  logic        flip_next_prbs = 0;

  function automatic logic [39:0] filler();
    return {16'h3C5C, 1'b1, 3'b000, 8'h00, 12'h000};
  endfunction

  task automatic add_event(int nh, logic corrupt, logic double_hdr, logic [7:0] l1c);
    logic [39:0] h, f, t;
    logic [7:0] c;
    h = {16'h3C5C, 1'b0, 3'b000, l1c, 12'($urandom)};
    if (double_hdr) begin frame_q.push_back(h); sent_frames.push_back(h); end
    c = crc_bits(8'h00, h, 40);
    frame_q.push_back(h); sent_frames.push_back(h);
    for (int i = 0; i < nh; i++) begin
      f = {1'b1, 2'b00, 37'({$urandom, $urandom})};
      c = crc_bits(c, f, 40);
      if (corrupt && i == 0) f[5] = ~f[5];
      frame_q.push_back(f); sent_frames.push_back(f);
    end
    t = {1'b0, chip_id, 6'b0, 8'(nh), 8'h00};
    c = crc_bits(c, t, 32);
    t[7:0] = c;
    frame_q.push_back(t); sent_frames.push_back(t);
  endtask

  // one crossing's worth of serial bits
  task automatic make_bx();
    logic [7:0] w;
    if (send_prbs) begin
      for (int i = 7; i >= 0; i--) begin
        logic b;
        b = prbs[6] ^ prbs[5];
        prbs = {prbs[5:0], b};
        w[i] = b;
      end
      if (flip_next_prbs) begin w[3] = ~w[3]; flip_next_prbs = 0; end
    end else begin
      logic tbit;
      tbit = 1'($urandom);
      trig_sent.push_back(tbit);
      w[7] = tbit;
      while (bitq.size() < 7) begin
        logic [39:0] f;
        f = (frame_q.size() > 0) ? frame_q.pop_front() : filler();
        for (int i = 39; i >= 0; i--) bitq.push_back(f[i]);
      end
      for (int i = 6; i >= 0; i--) begin
        logic d, s;
        d = bitq.pop_front();
        s = d ^ sh[38] ^ sh[57];
        sh = {sh[56:0], s};
        w[i] = s;
      end
    end
    for (int i = 7; i >= 0; i--) line.push_back(w[i]);
  endtask

  always @(negedge clk) begin
    if (line.size() < 16) make_bx();
    din <= line.pop_front();
  end

  // ---------------- receiver capture
  logic [39:0] got_frames [$];
  logic        trig_got [$];
  always @(posedge clk) begin
    if (word_dv && word_kind != FR_FILLER) got_frames.push_back(word);
    if (trig_valid && cnt.locked) trig_got.push_back(trig[0]);
  end

  checker_cnt_t c0, c1;

  initial begin
    line.push_back(0); line.push_back(0); line.push_back(1);   // 3-bit line delay
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (cnt.locked);
    repeat (400) @(posedge clk);
    chk(cnt.slips > 0, "word boundary found by slipping");
    c0 = cnt;
    got_frames.delete();
    sent_frames.delete();
    // known run: 10 good events, one corrupted, one with a doubled header
    for (int e = 0; e < 10; e++) add_event($urandom_range(0, 5), 0, 0, 8'(e));
    add_event(3, 1, 0, 8'd10);
    add_event(2, 0, 1, 8'd11);
    add_event(1, 0, 0, 8'd12);
    wait (frame_q.size() == 0);
    repeat (2000) @(posedge clk);
    c1 = cnt;
    chk(c1.events - c0.events == 13, $sformatf("13 events (got %0d)", c1.events - c0.events));
    chk(c1.crc_errors - c0.crc_errors == 1, $sformatf("one CRC error (got %0d)", c1.crc_errors - c0.crc_errors));
    chk(c1.format_errors - c0.format_errors == 1, $sformatf("one format error (got %0d)", c1.format_errors - c0.format_errors));
    chk(c1.fillers > c0.fillers, "fillers counted");
    chk(got_frames.size() == sent_frames.size(), $sformatf("frame count %0d vs %0d", got_frames.size(), sent_frames.size()));
    for (int i = 0; i < sent_frames.size() && i < got_frames.size(); i++)
      chk(got_frames[i] == sent_frames[i], $sformatf("recovered frame %0d", i));
    // trigger bits: the received sequence must appear in the sent one
    begin
      int best;
      logic ok;
      best = -1;
      for (int off = 0; off < trig_sent.size() - 64 && best < 0; off++) begin
        ok = 1;
        for (int i = 0; i < 64; i++) if (trig_sent[off + i] != trig_got[i]) ok = 0;
        if (ok) best = off;
      end
      chk(best >= 0, "trigger bits recovered in order");
    end
    // PRBS
    send_prbs = 1;
    repeat (32) @(posedge clk);
    prbs_en = 1;
    repeat (800) @(posedge clk);
    chk(cnt.prbs_errors == 0 && cnt.prbs_bits > 500, "PRBS error free");
    flip_next_prbs = 1;
    repeat (200) @(posedge clk);
    chk(cnt.prbs_errors == 3, $sformatf("one flipped bit gives 3 PRBS errors (got %0d)", cnt.prbs_errors));
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
