// tb_readout_controller: the switching network and the event buffers are
// modelled by a queue of per-event hit lists that follows l1a_push/ev_pop;
// the global buffer is a record queue whose `full` flag is driven at
// random to force stalls. Checks for every event: header with the L1A count
// and the triggered BCID (bcid - latency), the hits in order, one per
// granted crossing, and an end record with the hit count. Also checks that
// an L1A burst beyond the 8 event slots is dropped, counted, and flagged in
// the next end record, that ECR clears the L1A counter, and that nothing is
// written while the buffer is full.
module tb_readout_controller;
  import etroc_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, bx_en = 0, l1a = 0, ecr = 0;
  logic [11:0] bcid = 0;
  logic [8:0]  latency = 9'd100;
  logic [2:0]  data_type = 3'b001;
  logic        l1a_push, ev_pop, grant, net_valid, gsb_push, gsb_full;
  logic [2:0]  wr_ptr, rd_ptr;
  hit_t        net_data;
  gsb_rec_t    gsb_rec;
  logic [15:0] l1a_total, l1a_dropped, stall_bx;

  readout_controller #(.EB_DEPTH(8), .CB_DEPTH(512)) dut (.*);

  always #5 clk = ~clk;

  task automatic chk(logic cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  typedef struct { hit_t hits [$]; int sent; logic [7:0] l1c; logic [11:0] tb; } ev_t;
  ev_t evq [$];
  ev_t expect_q [$];
  ev_t done_q [$];
  gsb_rec_t recs [$];
  logic [7:0] l1c_model = 0;
  int full_pct = 0;
  int n_full_push = 0;

  assign net_valid = (evq.size() > 0) && (evq[0].sent < evq[0].hits.size());
  assign net_data  = net_valid ? evq[0].hits[evq[0].sent] : '0;

  // one bunch crossing: drive, then update the models at the strobe
  task automatic bx();
    logic p, pop, g, v, push, full_now;
    gsb_rec_t r;
    @(negedge clk);
    gsb_full = ($urandom_range(0, 99) < full_pct);
    bx_en = 1;
    #1;
    p = l1a_push; pop = ev_pop; g = grant; v = net_valid; push = gsb_push; r = gsb_rec; full_now = gsb_full;
    @(posedge clk);
    #1;
    if (push && full_now) n_full_push++;
    if (push) recs.push_back(r);
    if (g && v) evq[0].sent++;
    if (pop) void'(evq.pop_front());
    if (p) done_q.push_back(expect_q[expect_q.size() - 1]);
    if (l1a) l1c_model++;
    if (ecr) l1c_model = 0;
    @(negedge clk);
    bx_en = 0; l1a = 0; ecr = 0;
    bcid = (bcid == 12'(ORBIT_BX - 1)) ? 12'd0 : bcid + 12'd1;
  endtask

  task automatic trigger(int nh);
    ev_t e;
    for (int i = 0; i < nh; i++) e.hits.push_back(hit_t'({$urandom, 5'($urandom)}));
    e.sent = 0;
    e.l1c = l1c_model;
    e.tb  = (bcid >= 12'(latency)) ? bcid - 12'(latency) : 12'(ORBIT_BX) + bcid - 12'(latency);
    expect_q.push_back(e);
    l1a = 1;
    // the model event queue follows l1a_push
    @(negedge clk); #0;
  endtask

  always @(posedge clk) begin
    if (bx_en && l1a_push) begin
      ev_t e;
      e = expect_q[expect_q.size() - 1];
      evq.push_back(e);
    end
  end

  // compare the record stream with the expected events
  task automatic check_records(int nev, logic expect_ovf_first);
    for (int k = 0; k < nev; k++) begin
      ev_t e;
      gsb_rec_t r;
      e = done_q.pop_front();
      r = recs.pop_front();
      chk(r.kind == REC_HEADER && r.payload[19:12] == e.l1c && r.payload[11:0] == e.tb && r.payload[22:20] == data_type,
          $sformatf("header l1c %0d bcid %0d", e.l1c, e.tb));
      for (int h = 0; h < e.hits.size(); h++) begin
        r = recs.pop_front();
        chk(r.kind == REC_HIT && r.payload == e.hits[h], "hit record in order");
      end
      r = recs.pop_front();
      chk(r.kind == REC_END && r.payload[7:0] == 8'(e.hits.size()), "end record hit count");
      if (k == 0) chk(r.payload[8] == expect_ovf_first, "overflow flag in first end record");
    end
  endtask


  initial begin
    gsb_full = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // ---- normal traffic with random stalls
    full_pct = 30;
    for (int i = 0; i < 40; i++) begin
      trigger($urandom_range(0, 6));
      bx();
      repeat ($urandom_range(3, 25)) bx();
    end
    full_pct = 0;
    repeat (300) bx();
    chk(recs.size() > 0, "records written");
    check_records(40, 1'b0);
    chk(recs.size() == 0, "no extra records");
    chk(stall_bx > 0, "stalls happened");
    chk(n_full_push == 0, "no write while full");
    // ---- overflow: 10 L1As while the buffer is blocked
    full_pct = 100;
    for (int i = 0; i < 10; i++) begin
      trigger(1);
      bx();
    end
    chk(l1a_dropped == 16'd2, $sformatf("two L1As dropped (got %0d)", l1a_dropped));
    full_pct = 0;
    repeat (100) bx();
    check_records(8, 1'b1);
    chk(l1a_total == 16'd50, "L1A total");
    // ---- ECR clears the L1A counter
    ecr = 1; bx();
    trigger(0); bx();
    repeat (10) bx();
    check_records(1, 1'b0);
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
