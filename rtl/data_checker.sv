// data_checker: DAQ-side receiver and checker for one 320 Mbps data output.
//
// 1. Deserializer: the serial input is shifted in every clk; the 8-bit word
//    of a crossing is captured when the local phase counter equals `slip`.
// 2. The first n_trig bits of the word are trigger bits (trig, trig_valid);
//    the remaining 8-n_trig bits are frame bits and are processed one per
//    clk.
// 3. Self-synchronous descrambler x^58+x^39+1 (bypassed with
//    descramble_en low).
// 4. Frame finder: while searching, a 16-bit 3C5C marker (header or filler)
//    in the 40-bit window sets the frame boundary; LOCK_N markers at later
//    boundaries confirm it. A frame that is neither data, marker nor a
//    trailer with the expected chip id counts against the lock; 4 in a row
//    lose it. If no lock is reached within SLIP_BX crossings the word
//    boundary is slipped by one bit (slips counter).
// 5. Frame checks while locked: a header or filler is allowed only between
//    events, data and trailers only inside one (otherwise a format error);
//    the trailer's hit count must equal the data frames seen (format error)
//    and its CRC must equal CRC-8/0x2F over header, data frames and the
//    trailer's upper 32 bits (CRC error).
// 6. PRBS 2^7-1 checker on the raw bitstream when prbs_en is set: each bit
//    must equal the XOR of the bits 7 and 6 before it.
// Recovered frames appear on word with a one-clk word_dv strobe.
// Frame-format and CRC checking with error counters is published; the lock,
// slip and rule details are this design's choice.
module data_checker
  import etroc_pkg::*;
#(
  parameter int LOCK_N  = 4,
  parameter int SLIP_BX = 2048
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         din,
  input  logic [2:0]   n_trig,
  input  logic [16:0]  chip_id,
  input  logic         descramble_en,
  input  logic         prbs_en,
  output logic [39:0]  word,
  output logic         word_dv,
  output frame_kind_e  word_kind,
  output logic [5:0]   trig,
  output logic         trig_valid,
  output checker_cnt_t cnt
);

  // ---------------------------------------------------------------- deserializer
  logic [2:0] phase, slip;
  logic [7:0] des;
  logic [7:0] des_next;
  logic       byte_stb;
  assign des_next = {des[6:0], din};
  assign byte_stb = (phase == slip);

  logic [2:0] n;
  logic [3:0] need;
  assign n    = (n_trig > 3'd6) ? 3'd6 : n_trig;
  assign need = 4'd8 - 4'(n);

  logic [7:0] dq;
  logic [3:0] dq_cnt;
  logic       bit_v;
  logic       bit_s;
  assign bit_v = (dq_cnt != 0);
  assign bit_s = dq[7];

  // ---------------------------------------------------------------- descrambler and frame window
  logic [57:0] rh;
  logic        bit_d;
  assign bit_d = descramble_en ? (bit_s ^ rh[38] ^ rh[57]) : bit_s;

  typedef enum logic [1:0] {SEARCH, CONFIRM, LOCKED} fstate_e;
  fstate_e     fst;
  logic [39:0] win;
  logic [39:0] win_next;
  logic [5:0]  fbit;
  logic [3:0]  good, bad;
  logic [15:0] unlocked_bx;
  assign win_next = {win[38:0], bit_d};

  frame_kind_e kind;
  logic        plausible;
  assign kind      = classify(win_next);
  assign plausible = (kind != FR_TRAILER) || (win_next[38:22] == chip_id);

  // event checking state
  logic       in_event;
  logic [7:0] crc;
  logic [7:0] hits;
  logic [7:0] crc_tr;
  assign crc_tr = crc8_update(crc, win_next, 32);

  checker_cnt_t cnt_q;

  // PRBS checker
  logic [6:0] ph;
  logic [3:0] prbs_warm;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      phase       <= '0;
      slip        <= '0;
      des         <= '0;
      dq          <= '0;
      dq_cnt      <= '0;
      trig        <= '0;
      trig_valid  <= 1'b0;
      rh          <= '0;
      fst         <= SEARCH;
      win         <= '0;
      fbit        <= '0;
      good        <= '0;
      bad         <= '0;
      unlocked_bx <= '0;
      word        <= '0;
      word_dv     <= 1'b0;
      word_kind   <= FR_FILLER;
      in_event    <= 1'b0;
      crc         <= '0;
      hits        <= '0;
      ph          <= '0;
      prbs_warm   <= '0;
      cnt_q       <= '0;
    end else begin
      phase      <= phase + 3'd1;
      des        <= des_next;
      trig_valid <= 1'b0;
      word_dv    <= 1'b0;

      // ---- word capture and frame-bit queue
      if (byte_stb) begin
        for (int i = 0; i < 6; i++) trig[i] <= (i < int'(n)) ? des_next[7-i] : 1'b0;
        trig_valid <= 1'b1;
        dq         <= des_next << n;
        dq_cnt     <= need;
        if (fst != LOCKED) begin
          unlocked_bx <= unlocked_bx + 16'd1;
          if (unlocked_bx >= 16'(SLIP_BX)) begin
            unlocked_bx <= '0;
            slip        <= slip + 3'd1;
            cnt_q.slips   <= cnt_q.slips + 32'd1;
            fst         <= SEARCH;
          end
        end else begin
          unlocked_bx <= '0;
        end
      end else if (bit_v) begin
        dq     <= {dq[6:0], 1'b0};
        dq_cnt <= dq_cnt - 4'd1;
      end

      // ---- one frame bit
      if (bit_v && !prbs_en) begin
        rh   <= {rh[56:0], bit_s};
        win  <= win_next;
        fbit <= (fbit == 6'd39) ? 6'd0 : fbit + 6'd1;
        unique case (fst)
          SEARCH: begin
            if (win_next[39:24] == MARKER) begin
              fst  <= CONFIRM;
              fbit <= '0;
              good <= 4'd1;
            end
          end
          CONFIRM: begin
            if (fbit == 6'd39) begin
              if (!plausible) fst <= SEARCH;
              else if (kind == FR_HEADER || kind == FR_FILLER) begin
                good <= good + 4'd1;
                if (good + 4'd1 >= 4'(LOCK_N)) begin
                  fst      <= LOCKED;
                  bad      <= '0;
                  in_event <= 1'b0;
                end
              end
            end
          end
          LOCKED: begin
            if (fbit == 6'd39) begin
              word      <= win_next;
              word_dv   <= 1'b1;
              word_kind <= kind;
              cnt_q.frames <= cnt_q.frames + 32'd1;
              if (!plausible) begin
                bad <= bad + 4'd1;
                if (bad + 4'd1 >= 4'd4) fst <= SEARCH;
              end else begin
                bad <= '0;
              end
              unique case (kind)
                FR_HEADER: begin
                  if (in_event) cnt_q.format_errors <= cnt_q.format_errors + 32'd1;
                  in_event <= 1'b1;
                  crc      <= crc8_update(8'h00, win_next, 40);
                  hits     <= '0;
                end
                FR_FILLER: begin
                  cnt_q.fillers <= cnt_q.fillers + 32'd1;
                  if (in_event) begin
                    cnt_q.format_errors <= cnt_q.format_errors + 32'd1;
                    in_event <= 1'b0;
                  end
                end
                FR_DATA: begin
                  if (!in_event) cnt_q.format_errors <= cnt_q.format_errors + 32'd1;
                  else begin
                    crc      <= crc8_update(crc, win_next, 40);
                    hits     <= hits + 8'd1;
                    cnt_q.hits <= cnt_q.hits + 32'd1;
                  end
                end
                default: begin // trailer
                  if (!in_event || !plausible || win_next[15:8] != hits)
                    cnt_q.format_errors <= cnt_q.format_errors + 32'd1;
                  if (in_event && crc_tr != win_next[7:0])
                    cnt_q.crc_errors <= cnt_q.crc_errors + 32'd1;
                  if (in_event) cnt_q.events <= cnt_q.events + 32'd1;
                  in_event <= 1'b0;
                end
              endcase
            end
          end
          default: fst <= SEARCH;
        endcase
      end

      // ---- PRBS 2^7-1 on the raw stream
      ph <= {ph[5:0], din};
      if (prbs_en) begin
        if (prbs_warm != 4'd15) prbs_warm <= prbs_warm + 4'd1;
        else begin
          cnt_q.prbs_bits <= cnt_q.prbs_bits + 32'd1;
          if (din != (ph[6] ^ ph[5])) cnt_q.prbs_errors <= cnt_q.prbs_errors + 32'd1;
        end
      end else begin
        prbs_warm <= '0;
      end
    end
  end

  always_comb begin
    cnt        = cnt_q;
    cnt.locked = (fst == LOCKED);
  end

endmodule
