// frame_builder: turns the records of the global data stream buffer into
// 40-bit frames and computes the event CRC.
//
// `frame` always holds the next frame to be sent. When the link takes it
// (bx_en && take) the next one is formed: a header record gives a header
// frame and restarts the CRC, a hit record gives a pixel-data frame, an end
// record gives the trailer (chip id, status, hit count, CRC), and an empty
// buffer gives a filler. The CRC is CRC-8, polynomial 0x2F, initial value 0,
// over the header, every data frame and the upper 32 bits of the trailer,
// MSB first; fillers are outside events and not covered. Frame layouts are
// listed in etroc_pkg.
//
// The 40-bit frame, the four frame types, the data-frame fields and the
// 8-bit trailer CRC are published; the exact layouts and the polynomial are
// chosen to match captured frames.
module frame_builder
  import etroc_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        bx_en,
  input  logic        take,
  input  logic [16:0] chip_id,
  input  logic [2:0]  data_type,
  input  logic [11:0] bcid,
  input  logic        gsb_empty,
  input  gsb_rec_t    gsb_rec,
  output logic        gsb_pop,
  output logic [39:0] frame,
  output frame_kind_e frame_kind
);

  logic [7:0]  crc;
  logic [7:0]  last_l1c;
  logic [39:0] next_frame;
  frame_kind_e next_kind;
  logic [7:0]  next_crc;
  logic [39:0] tr_top;

  assign gsb_pop = bx_en && take && !gsb_empty;

  always_comb begin
    next_frame = make_filler(data_type, last_l1c, bcid);
    next_kind  = FR_FILLER;
    next_crc   = crc;
    tr_top     = '0;
    if (!gsb_empty) begin
      unique case (gsb_rec.kind)
        REC_HEADER: begin
          next_frame = make_header(gsb_rec.payload[22:20], gsb_rec.payload[19:12], gsb_rec.payload[11:0]);
          next_kind  = FR_HEADER;
          next_crc   = crc8_update(8'h00, next_frame, 40);
        end
        REC_HIT: begin
          next_frame = make_data(2'b00, hit_t'(gsb_rec.payload));
          next_kind  = FR_DATA;
          next_crc   = crc8_update(crc, next_frame, 40);
        end
        default: begin
          tr_top     = make_trailer(chip_id, gsb_rec.payload[13:8], gsb_rec.payload[7:0], 8'h00);
          next_crc   = crc8_update(crc, tr_top, 32);
          next_frame = make_trailer(chip_id, gsb_rec.payload[13:8], gsb_rec.payload[7:0], next_crc);
          next_kind  = FR_TRAILER;
        end
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      crc        <= '0;
      last_l1c   <= '0;
      frame      <= make_filler(3'b000, 8'h00, 12'h000);
      frame_kind <= FR_FILLER;
    end else if (bx_en && take) begin
      frame      <= next_frame;
      frame_kind <= next_kind;
      crc        <= next_crc;
      if (next_kind == FR_HEADER) last_l1c <= gsb_rec.payload[19:12];
    end
  end

endmodule
