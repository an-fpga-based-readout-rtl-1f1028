// tb_etroc_emu: one emulated chip at full size (16x16 pixels, 512-deep
// circular buffers) in test-pattern mode with a fixed set of hit pixels.
// The test encodes fast commands itself (IDLE training, BCR, L1As, one L1A
// with a flipped bit) and decodes DOL itself: 8 bits per crossing after the
// chip's BX strobe, 1 trigger bit + 7 frame bits, descrambling with
// x^58+x^39+1. Every event must be: header (3C5C marker, type 001, L1A
// count), the hit pixels as data frames in switching-network priority
// order (columns 8..15 then 7..0, row 0 first) with the pattern fields,
// and a trailer with chip id, hit count and a CRC-8/0x2F computed here.
// Header BCIDs must step with the L1A spacing. Fillers fill the gaps, the
// trigger bit is 1 (the hit pixels are in the trigger mask), and DOR must
// equal DOL.
module tb_etroc_emu;
  import etroc_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, fc = 0, dol, dor, bx_en;
  logic [11:0] bcid;
  etroc_cfg_t cfg;
  etroc_status_t status;

  etroc_emu dut (.*);

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

  // ---------------- fast command transmitter (own word phase)
  logic [7:0] fc_q [$];
  logic [7:0] fc_sr;
  int         fc_bit = 0;
  always @(negedge clk) begin
    if (fc_bit == 0) fc_sr = (fc_q.size() > 0) ? fc_q.pop_front() : 8'hF0;
    fc <= fc_sr[7 - fc_bit];
    fc_bit = (fc_bit + 1) % 8;
  end

  // ---------------- receiver
  int   bitpos = -1;
  logic [7:0] w;
  logic [7:0] wr;
  int   nwords = 0;
  logic [57:0] rh = '0;
  logic [39:0] cur;
  int   ncur = 0;
  logic [39:0] frames [$];
  int   trig_ones = 0, trig_total = 0, dor_mismatch = 0;
  always @(posedge clk) begin
    if (dol != dor) dor_mismatch++;
    if (bitpos >= 0) begin
      w[7 - bitpos] = dol;
      if (bitpos == 7) begin
        nwords++;
        if (nwords > 1) begin
          trig_total++;
          trig_ones += int'(w[7]);
          for (int i = 6; i >= 0; i--) begin
            logic d;
            d  = w[i] ^ rh[38] ^ rh[57];
            rh = {rh[56:0], w[i]};
            cur = {cur[38:0], d};
            ncur++;
            if (ncur == 40) begin frames.push_back(cur); ncur = 0; end
          end
        end
      end
    end
    if (bx_en) bitpos <= 0;
    else if (bitpos >= 0 && bitpos < 7) bitpos <= bitpos + 1;
    else bitpos <= -1;
  end

  // hit pixels and their expected order
  int hit_r [5] = '{0, 4, 15, 2, 7};
  int hit_c [5] = '{8, 8, 11, 6, 0};
  // priority order: col 8 (rows 0, 4), col 11 (row 15), col 6 (row 2), col 0 (row 7)

  int l1a_bx [$];
  int bx_count = 0;
  always @(posedge clk) if (bx_en) bx_count++;

  initial begin
    cfg = '0;
    cfg.chip_id     = 17'h1ABCD;
    cfg.latency     = 9'd40;
    cfg.data_mode   = 1'b1;
    cfg.trig_mask   = '1;
    cfg.trig_gran   = 2'd0;
    cfg.n_trig      = 3'd1;
    cfg.gap_start   = 12'hFFF;
    cfg.scramble_en = 1'b1;
    for (int i = 0; i < 5; i++) cfg.tp_hit[hit_r[i] * 16 + hit_c[i]] = 1'b1;
    repeat (5) @(posedge clk);
    rst_n = 1;
    repeat (12) fc_q.push_back(8'hF0);
    fc_q.push_back(8'h5A);                              // BCR
    repeat (600) fc_q.push_back(8'hF0);                 // fill the circular buffers
    for (int e = 0; e < 12; e++) begin
      fc_q.push_back(e == 5 ? (8'h96 ^ 8'h10) : 8'h96); // L1A, one with a flipped bit
      repeat (40 + 7 * e) fc_q.push_back(8'hF0);
    end
    wait (fc_q.size() == 0);
    repeat (8 * 200) @(posedge clk);
    // ---------------- check the frame stream
    begin
      int i, nev;
      logic [11:0] prev_bcid;
      int spacing [$];
      nev = 0;
      i = 0;
      for (int e = 0; e < 12; e++) spacing.push_back(41 + 7 * e);
      while (i < frames.size()) begin
        logic [39:0] f;
        f = frames[i];
        if (f[39:24] == 16'h3C5C && f[23] == 1'b1) begin i++; continue; end   // filler
        chk(f[39:24] == 16'h3C5C && f[23] == 1'b0, $sformatf("header expected, got %h", f));
        chk(f[22:20] == 3'b001 && f[19:12] == 8'(nev), $sformatf("header type/L1A count %h", f));
        if (nev > 0) chk(12'(f[11:0] - prev_bcid) == 12'(spacing[nev - 1]), $sformatf("BCID step %0d", f[11:0] - prev_bcid));
        prev_bcid = f[11:0];
        begin
          logic [7:0] c;
          int order [5] = '{0, 1, 2, 3, 4};
          c = crc_bits(8'h00, f, 40);
          for (int h = 0; h < 5; h++) begin
            logic [3:0] r, cc;
            logic [39:0] exp_f;
            r = 4'(hit_r[order[h]]); cc = 4'(hit_c[order[h]]);
            exp_f = {1'b1, 2'b00, r, cc, r, cc, 2'b00, 1'b0, r, cc, 2'b00, cc, r};
            chk(frames[i + 1 + h] == exp_f, $sformatf("event %0d data %0d got %h exp %h", nev, h, frames[i + 1 + h], exp_f));
            c = crc_bits(c, frames[i + 1 + h], 40);
          end
          f = frames[i + 6];
          c = crc_bits(c, f, 32);
          chk(f[39] == 1'b0 && f[38:22] == 17'h1ABCD && f[15:8] == 8'd5 && f[7:0] == c,
              $sformatf("trailer %h (crc exp %h)", f, c));
        end
        i += 7;
        nev++;
      end
      chk(nev == 12, $sformatf("12 events read out (got %0d)", nev));
    end
    chk(trig_total > 1000 && trig_ones >= trig_total - 3, $sformatf("trigger bit set every crossing after start-up (%0d of %0d)", trig_ones, trig_total));
    chk(dor_mismatch == 0, "DOR repeats DOL");
    chk(status.fc_locked && status.fc_corrected == 16'd1, "FC locked, one corrected command");
    chk(status.l1a_count == 16'd12 && status.l1a_dropped == 0, "L1A count");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #200000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
