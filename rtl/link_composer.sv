// link_composer: builds the 8-bit word sent per bunch crossing on a 320 Mbps
// output, sharing it between the trigger path and the frame stream.
//
// With n = n_trig trigger bits (0..6; larger values act as 6) the word is
// {trig[0], trig[1], ..., trig[n-1], 8-n frame bits}, first-sent bit in
// [7]. Frame bits come from a gearbox: a left-aligned 48-bit buffer that
// takes the next 40-bit (scrambled) frame whenever fewer than 8-n bits are
// left (`take` pulses with that bx_en) and hands out 8-n bits per crossing,
// so a frame spans 40/(8-n) crossings. With prbs_en the word is the next
// 8 bits of PRBS 2^7-1 (x^7+x^6+1) and no frame is taken.
// `word` is registered at bx_en.
//
// The n / 8-n bandwidth split and the PRBS 2^7-1 link test are published;
// the bit order is this design's choice.
module link_composer
  import etroc_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        bx_en,
  input  logic [2:0]  n_trig,
  input  logic [15:0] trig,
  input  logic [39:0] frame,
  input  logic        prbs_en,
  output logic        take,
  output logic [7:0]  word
);

  logic [47:0] sb;
  logic [5:0]  cnt;
  logic [6:0]  prbs;

  logic [2:0]  n;
  logic [3:0]  need;
  logic [47:0] merged;
  logic [5:0]  cnt_m;
  logic [7:0]  data_bits;
  logic [7:0]  trig_bits;
  logic [14:0] prbs_nx;

  always_comb begin
    n    = (n_trig > 3'd6) ? 3'd6 : n_trig;
    need = 4'd8 - 4'(n);
    take = bx_en && !prbs_en && (cnt < 6'(need));
    if (cnt < 6'(need)) begin
      merged = sb | ({frame, 8'h00} >> cnt);
      cnt_m  = cnt + 6'd40;
    end else begin
      merged = sb;
      cnt_m  = cnt;
    end
    data_bits = 8'(merged >> (6'd48 - 6'(need)));
    trig_bits = '0;
    for (int i = 0; i < 6; i++) if (i < int'(n)) trig_bits[7-i] = trig[i];
    prbs_nx = prbs7_step8(prbs);
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      sb   <= '0;
      cnt  <= '0;
      word <= '0;
      prbs <= 7'h7F;
    end else if (bx_en) begin
      if (prbs_en) begin
        word <= prbs_nx[7:0];
        prbs <= prbs_nx[14:8];
      end else begin
        word <= trig_bits | data_bits;
        sb   <= merged << need;
        cnt  <= cnt_m - 6'(need);
      end
    end
  end

endmodule
