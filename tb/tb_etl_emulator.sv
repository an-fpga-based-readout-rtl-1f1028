// tb_etl_emulator: the whole emulator FPGA at its default size (four chips
// of 16x16 pixels, 512-deep circular buffers) in loopback: fc_out drives
// both fc_in pairs and every DOL/DOR returns, delayed by a few clk, to the
// DAQ-side checkers. Chips 0, 1 and 3 send dummy TDC data, chip 2 a test
// pattern; chip 3 sends 4 trigger bits at 2x2 granularity, the others 1 bit
// of the whole chip. The run goes through: checker word alignment by bit
// slip and frame lock; random L1As; a stretch where every fast command has
// one flipped bit (corrected by the chips); an L1A burst that fills the
// event buffers (dropped L1As) and the global buffers (network stalls);
// orbits with BCR and beam-gap flashing bits; and finally PRBS mode.
// Each mechanism is counted and must occur; every lane must report all
// accepted events with no CRC or frame-format error.
module tb_etl_emulator;
  import etroc_pkg::*;
  localparam int N = 4;
  int checks = 0, failures = 0;

  logic clk = 0, rst_n = 0;
  logic [1:0] fc_in, fc_out;
  etroc_cfg_t cfg [N];
  logic [N-1:0] dol, dor, dol_in, dor_in;
  etroc_status_t status [N];
  logic l1a_req = 0, ecr_req = 0, auto_bcr = 1, err_inject = 0;
  logic [15:0] l1a_rate = 0, l1a_sent, bcr_sent;
  logic [2:0] err_pos = 3'd2;
  logic [2:0] chk_n_trig [N];
  logic [16:0] chk_chip_id [N];
  logic chk_descramble = 1, chk_prbs = 0;
  logic [39:0] chk_word [2*N];
  logic chk_word_dv [2*N];
  logic [5:0] chk_trig [2*N];
  checker_cnt_t chk_cnt [2*N];

  etl_emulator dut (.*);

  always #5 clk = ~clk;

  // loopback cables with a few clk of delay
  logic [1:0]   fc_d  [4];
  logic [N-1:0] dol_d [6];
  logic [N-1:0] dor_d [6];
  always @(posedge clk) begin
    fc_d[0] <= fc_out;
    for (int i = 1; i < 4; i++) fc_d[i] <= fc_d[i-1];
    dol_d[0] <= dol; dor_d[0] <= dor;
    for (int i = 1; i < 6; i++) begin dol_d[i] <= dol_d[i-1]; dor_d[i] <= dor_d[i-1]; end
  end
  assign fc_in  = fc_d[3];
  assign dol_in = dol_d[2];
  assign dor_in = dor_d[5];

  task automatic chk(logic cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic run_bx(int n);
    repeat (8 * n) @(posedge clk);
  endtask

  function automatic logic all_locked();
    for (int j = 0; j < 2 * N; j++) if (!chk_cnt[j].locked) return 0;
    return 1;
  endfunction

  // flashing bits: runs of >= 40 zero trigger bits on lane 0 (chip 0 is
  // hit nearly every crossing, so only the gap gives such runs)
  int zero_run = 0, gap_runs = 0;
  always @(posedge clk) begin
    if (dut.g_chk[0].u_chk.trig_valid && chk_cnt[0].locked && !chk_prbs) begin
      if (chk_trig[0][0] == 1'b0) zero_run++;
      else begin
        if (zero_run >= 40) gap_runs++;
        zero_run = 0;
      end
    end
  end

  int stalls, dropped, corrected, events, fillers, slips;

  initial begin
    for (int i = 0; i < N; i++) begin
      cfg[i] = '0;
      cfg[i].chip_id     = 17'h1ABCD + 17'(i);
      cfg[i].latency     = 9'd100;
      cfg[i].data_mode   = (i == 2);
      cfg[i].occupancy   = 8'd4;        // ~1.6% of pixels per crossing
      cfg[i].trig_mask   = '1;
      cfg[i].trig_gran   = (i == 3) ? 2'd2 : 2'd0;
      cfg[i].n_trig      = (i == 3) ? 3'd4 : 3'd1;
      cfg[i].gap_start   = 12'd3450;
      cfg[i].scramble_en = 1'b1;
      chk_n_trig[i]  = cfg[i].n_trig;
      chk_chip_id[i] = cfg[i].chip_id;
    end
    for (int k = 0; k < 6; k++) cfg[2].tp_hit[$urandom_range(0, 255)] = 1'b1;
    repeat (5) @(posedge clk);
    rst_n = 1;
    // ---- alignment
    begin
      int t;
      t = 0;
      while (!all_locked() && t < 40000) begin run_bx(1); t++; end
      chk(all_locked(), $sformatf("all 8 lanes locked after %0d BX", t));
    end
    chk(status[0].fc_locked && status[3].fc_locked, "chips locked to the fast-command stream");
    // ---- random L1As
    l1a_rate = 16'd1311;              // 2% of crossings
    run_bx(3000);
    // ---- single-bit errors on every command
    err_inject = 1;
    run_bx(300);
    err_inject = 0;
    // ---- burst: overflow and stalls
    l1a_rate = 16'd40000;
    run_bx(150);
    l1a_rate = 16'd650;
    run_bx(4000);
    l1a_rate = 0;
    run_bx(3000);
    // ---- results
    stalls = 0; dropped = 0; corrected = 0; events = 0; fillers = 0; slips = 0;
    for (int i = 0; i < N; i++) begin
      stalls    += int'(status[i].stall_bx);
      dropped   += int'(status[i].l1a_dropped);
      corrected += int'(status[i].fc_corrected);
      chk(status[i].fc_errors == 0, $sformatf("chip %0d: no uncorrectable FC word", i));
      chk(status[i].l1a_count == l1a_sent, $sformatf("chip %0d saw %0d of %0d L1As", i, status[i].l1a_count, l1a_sent));
      for (int s = 0; s < 2; s++) begin
        checker_cnt_t c;
        c = chk_cnt[2*i + s];
        events  += int'(c.events);
        fillers += int'(c.fillers);
        slips   += int'(c.slips);
        chk(c.events == 32'(status[i].l1a_count - status[i].l1a_dropped),
            $sformatf("lane %0d: %0d events, chip accepted %0d", 2*i + s, c.events, status[i].l1a_count - status[i].l1a_dropped));
        chk(c.crc_errors == 0 && c.format_errors == 0,
            $sformatf("lane %0d: crc %0d format %0d errors", 2*i + s, c.crc_errors, c.format_errors));
      end
    end
    $display("mechanisms: L1A sent %0d, events %0d, corrected FC %0d, dropped L1A %0d, stall BX %0d, fillers %0d, slips %0d, BCR %0d, gap runs %0d",
             l1a_sent, events, corrected, dropped, stalls, fillers, slips, bcr_sent, gap_runs);
    chk(l1a_sent > 50, "L1As issued");
    chk(events > 0, "events read out and checked");
    chk(corrected > 0, "single-bit fast-command errors corrected");
    chk(dropped > 0, "event-buffer overflow occurred");
    chk(stalls > 0, "switching network stalled on a full buffer");
    chk(fillers > 0, "fillers sent");
    chk(slips > 0, "word boundary found by bit slip");
    chk(bcr_sent > 0, "BCR sent at the orbit boundary");
    chk(gap_runs > 0, "flashing bits seen in the beam gap");
    chk(chk_cnt[4].hits > 0 && chk_cnt[0].hits > 0, "test-pattern and dummy-data hits read out");
    // ---- PRBS mode
    for (int i = 0; i < N; i++) cfg[i].prbs_en = 1'b1;
    run_bx(4);
    chk_prbs = 1;
    run_bx(200);
    for (int j = 0; j < 2 * N; j++)
      chk(chk_cnt[j].prbs_bits > 1000 && chk_cnt[j].prbs_errors == 0, $sformatf("lane %0d PRBS error free", j));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #50000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
