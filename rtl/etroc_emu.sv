// etroc_emu: the digital functions of one ETROC2 readout chip.
//
// Data path, one step per 25 ns bunch crossing (BX):
//   pixel data source -> circular buffer --L1A--> L1A event buffer
//   -> switching network (one pixel per BX) -> global data stream buffer
//   -> frame builder (header / data / trailer with CRC-8 / filler)
//   -> scrambler -> link composer (n trigger bits + 8-n frame bits per BX)
//   -> serializer -> DOL and DOR at 320 Mbps.
// The fast command decoder recovers IDLE/L1A/BCR/ECR from the 320 Mbps FC
// input; BCR clears the 12-bit bunch counter (which also wraps once per
// 3564-BX orbit), ECR the L1A counter. The trigger path forms the coarse
// hit map from each crossing's hits.
//
// Clocking: everything runs on the 320 MHz clock `clk`; a free-running
// divide-by-8 counter makes the BX strobe, so one BX is 8 clk and carries
// 8 output bits. A decoded command is applied at the next BX strobe.
// `cfg` stands for the slow-control registers of the I2C target.
// DOR repeats the DOL stream; how a chip divides its data between its two
// outputs is not something this design models.
module etroc_emu
  import etroc_pkg::*;
#(
  parameter int N_ROWS   = 16,
  parameter int N_COLS   = 16,
  parameter int CB_DEPTH = 512,
  parameter int EB_DEPTH = 8,
  parameter int GSB_DEPTH = 16
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          fc,
  input  etroc_cfg_t    cfg,
  output logic          dol,
  output logic          dor,
  output logic          bx_en,
  output logic [11:0]   bcid,
  output etroc_status_t status
);

  localparam int CBW = $clog2(CB_DEPTH);
  localparam int EBW = $clog2(EB_DEPTH);

  // ---------------------------------------------------------------- BX strobe
  logic [2:0] phase;
  always_ff @(posedge clk) begin
    if (!rst_n) phase <= '0;
    else        phase <= phase + 3'd1;
  end
  assign bx_en = (phase == 3'd7);

  // ---------------------------------------------------------------- fast commands
  logic      cmd_valid, fc_corr, fc_err, fc_locked;
  fast_cmd_e cmd, held_cmd, cur_cmd;
  logic      held_valid, cur_valid;

  fast_command_decoder u_fcd (
    .clk, .rst_n, .fc_bit(fc), .cmd_valid, .cmd, .corrected(fc_corr),
    .error(fc_err), .locked(fc_locked)
  );

  assign cur_valid = cmd_valid || held_valid;
  assign cur_cmd   = cmd_valid ? cmd : held_cmd;

  logic l1a, bcr, ecr;
  assign l1a = bx_en && cur_valid && (cur_cmd == FC_L1A);
  assign bcr = bx_en && cur_valid && (cur_cmd == FC_BCR);
  assign ecr = bx_en && cur_valid && (cur_cmd == FC_ECR);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      held_valid <= 1'b0;
      held_cmd   <= FC_IDLE;
      bcid       <= '0;
      status.fc_corrected <= '0;
      status.fc_errors    <= '0;
    end else begin
      if (bx_en)          held_valid <= 1'b0;
      else if (cmd_valid) begin
        held_valid <= 1'b1;
        held_cmd   <= cmd;
      end
      if (bx_en) begin
        if (bcr || bcid == 12'(ORBIT_BX - 1)) bcid <= '0;
        else                                  bcid <= bcid + 12'd1;
      end
      if (fc_corr) status.fc_corrected <= status.fc_corrected + 16'd1;
      if (fc_err)  status.fc_errors    <= status.fc_errors + 16'd1;
    end
  end
  assign status.fc_locked = fc_locked;

  // ---------------------------------------------------------------- pixel matrix
  logic           l1a_push, ev_pop, grant, net_valid;
  logic [EBW-1:0] wr_ptr, rd_ptr;
  hit_t           net_data;
  logic own_valid [N_ROWS][N_COLS];
  hit_t own_data  [N_ROWS][N_COLS];
  logic own_read  [N_ROWS][N_COLS];
  logic [N_ROWS*N_COLS-1:0] hit_now;

  for (genvar r = 0; r < N_ROWS; r++) begin : g_r
    for (genvar c = 0; c < N_COLS; c++) begin : g_c
      pixel #(.ROW(r), .COL(c), .CB_DEPTH(CB_DEPTH), .EB_DEPTH(EB_DEPTH)) u_pix (
        .clk, .rst_n, .bx_en,
        .mode(cfg.data_mode), .occupancy(cfg.occupancy), .tp_hit(cfg.tp_hit[r*N_COLS+c]),
        .latency(CBW'(cfg.latency)),
        .l1a_push, .wr_ptr, .ev_pop, .rd_ptr,
        .own_read(own_read[r][c]), .own_valid(own_valid[r][c]), .own_data(own_data[r][c]),
        .hit_now(hit_now[r*N_COLS+c])
      );
    end
  end

  switching_network #(.N_ROWS(N_ROWS), .N_COLS(N_COLS)) u_net (
    .grant, .own_valid, .own_data, .own_read, .out_valid(net_valid), .out_data(net_data)
  );

  // ---------------------------------------------------------------- readout
  logic     gsb_push, gsb_pop, gsb_empty, gsb_full;
  gsb_rec_t gsb_in, gsb_out;
  logic [$clog2(GSB_DEPTH):0] gsb_count;
  logic [2:0] data_type;
  assign data_type = {2'b00, cfg.data_mode};

  readout_controller #(.EB_DEPTH(EB_DEPTH), .CB_DEPTH(CB_DEPTH)) u_roc (
    .clk, .rst_n, .bx_en, .l1a, .ecr, .bcid, .latency(CBW'(cfg.latency)), .data_type,
    .l1a_push, .wr_ptr, .ev_pop, .rd_ptr, .grant, .net_valid, .net_data,
    .gsb_push, .gsb_rec(gsb_in), .gsb_full,
    .l1a_total(status.l1a_count), .l1a_dropped(status.l1a_dropped), .stall_bx(status.stall_bx)
  );

  sync_fifo #(.W($bits(gsb_rec_t)), .DEPTH(GSB_DEPTH)) u_gsb (
    .clk, .rst_n, .en(bx_en), .push(gsb_push), .din(gsb_in), .pop(gsb_pop),
    .dout(gsb_out), .empty(gsb_empty), .full(gsb_full), .count(gsb_count)
  );

  logic [39:0] frame, frame_scr;
  frame_kind_e frame_kind;
  logic        take;

  frame_builder u_fb (
    .clk, .rst_n, .bx_en, .take, .chip_id(cfg.chip_id), .data_type, .bcid,
    .gsb_empty, .gsb_rec(gsb_out), .gsb_pop, .frame, .frame_kind
  );

  scrambler u_scr (
    .clk, .rst_n, .bx_en, .en(cfg.scramble_en), .load(take), .din(frame), .dout(frame_scr)
  );

  // ---------------------------------------------------------------- trigger path and link
  logic [15:0] trig;
  logic        in_gap;

  trigger_path #(.N_ROWS(N_ROWS), .N_COLS(N_COLS)) u_trig (
    .clk, .rst_n, .bx_en, .hits(hit_now), .mask(cfg.trig_mask[N_ROWS*N_COLS-1:0]),
    .gran(cfg.trig_gran), .bcid, .gap_start(cfg.gap_start), .trig, .in_gap
  );

  logic [7:0] word;
  link_composer u_link (
    .clk, .rst_n, .bx_en, .n_trig(cfg.n_trig), .trig, .frame(frame_scr),
    .prbs_en(cfg.prbs_en), .take, .word
  );

  serializer #(.W(8)) u_ser_l (.clk, .rst_n, .load(bx_en), .word, .sout(dol));
  serializer #(.W(8)) u_ser_r (.clk, .rst_n, .load(bx_en), .word, .sout(dor));

endmodule
