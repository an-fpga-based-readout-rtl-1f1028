// etroc_pkg: types, constants and helper functions shared by the ETROC2
// digital emulator and its DAQ-side counterparts.
//
// Frame layouts (40 bits, sent MSB first):
//   data    {1'b1, status[1:0], row[3:0], col[3:0], toa[9:0], tot[8:0], cal[9:0]}
//   header  {16'h3C5C, 1'b0, type[2:0], l1a_count[7:0], bcid[11:0]}
//   filler  {16'h3C5C, 1'b1, type[2:0], l1a_count[7:0], bcid[11:0]}
//   trailer {1'b0, chip_id[16:0], status[5:0], hits[7:0], crc[7:0]}
// The field list of a data frame (row, column, TOA, TOT, CAL, three
// control/status bits) follows the published description; the placement of
// fields, the 3C5C marker and the header/filler/trailer contents are chosen
// to agree with captured frames (e.g. header 3C5C15916F, trailer 6AF3400268
// for an event with two hits). The event CRC is CRC-8, polynomial 0x2F,
// initial value 0, MSB first, over the header, every data frame and the
// upper 32 bits of the trailer; it reproduces the CRC of those captures.
//
// Fast commands are 8-bit words of a code with minimum Hamming distance 4
// (the published requirement is at least 3). Only L1A is a published
// command name; IDLE, BCR and ECR are this design's choice.
package etroc_pkg;

  localparam int FRAME_W  = 40;
  localparam int LINK_W   = 8;      // bits per 25 ns bunch crossing at 320 Mbps
  localparam int ORBIT_BX = 3564;   // LHC orbit length in bunch crossings

  localparam logic [15:0] MARKER   = 16'h3C5C;
  localparam logic [7:0]  CRC_POLY = 8'h2F;

  // ------------------------------------------------------------ fast commands
  typedef enum logic [7:0] {
    FC_IDLE = 8'hF0,
    FC_L1A  = 8'h96,
    FC_BCR  = 8'h5A,
    FC_ECR  = 8'h33
  } fast_cmd_e;

  localparam int N_FC = 4;
  localparam logic [7:0] FC_CODES [N_FC] = '{8'hF0, 8'h96, 8'h5A, 8'h33};

  // ------------------------------------------------------------ pixel data
  typedef struct packed {
    logic       dv;
    logic [9:0] toa;
    logic [8:0] tot;
    logic [9:0] cal;
  } tdc_t;                                   // 30 bits

  typedef struct packed {
    logic [3:0] row;
    logic [3:0] col;
    logic [9:0] toa;
    logic [8:0] tot;
    logic [9:0] cal;
  } hit_t;                                   // 37 bits

  // ------------------------------------------------------------ global data stream buffer records
  typedef enum logic [1:0] {
    REC_HEADER = 2'd0,
    REC_HIT    = 2'd1,
    REC_END    = 2'd2
  } rec_kind_e;

  // REC_HEADER payload: {13'b0, type[2:0], l1a_count[7:0], bcid[11:0]}
  // REC_HIT    payload: hit_t
  // REC_END    payload: {23'b0, status[5:0], hits[7:0]}
  typedef struct packed {
    rec_kind_e   kind;
    logic [36:0] payload;
  } gsb_rec_t;                               // 39 bits

  typedef enum logic [1:0] {
    FR_HEADER  = 2'd0,
    FR_DATA    = 2'd1,
    FR_TRAILER = 2'd2,
    FR_FILLER  = 2'd3
  } frame_kind_e;

  // ------------------------------------------------------------ configuration (slow-control registers)
  typedef struct packed {
    logic [16:0]  chip_id;
    logic [8:0]   latency;     // L1A latency in bunch crossings, 1..CB_DEPTH-1
    logic         data_mode;   // 0 dummy TDC data, 1 test pattern
    logic [7:0]   occupancy;   // dummy-hit probability per pixel per BX, /256
    logic [255:0] tp_hit;      // test pattern: pixel {row,col} is hit
    logic [255:0] trig_mask;   // pixels that feed the trigger path
    logic [1:0]   trig_gran;   // 0 one block, 1 two (2x1), 2 four (2x2), 3 sixteen (4x4)
    logic [2:0]   n_trig;      // trigger bits per BX, 0..6
    logic [11:0]  gap_start;   // first BX of the beam gap (flashing bits)
    logic         scramble_en;
    logic         prbs_en;     // send PRBS 2^7-1 instead of frames and trigger bits
  } etroc_cfg_t;

  typedef struct packed {
    logic        fc_locked;
    logic [15:0] fc_corrected;
    logic [15:0] fc_errors;
    logic [15:0] l1a_count;
    logic [15:0] l1a_dropped;
    logic [15:0] stall_bx;
  } etroc_status_t;

  typedef struct packed {
    logic        locked;
    logic [31:0] frames;
    logic [31:0] events;
    logic [31:0] hits;
    logic [31:0] fillers;
    logic [31:0] crc_errors;
    logic [31:0] format_errors;
    logic [31:0] slips;
    logic [31:0] prbs_bits;
    logic [31:0] prbs_errors;
  } checker_cnt_t;

  // ------------------------------------------------------------ functions
  function automatic logic [39:0] make_header(logic [2:0] typ, logic [7:0] l1c, logic [11:0] bcid);
    return {MARKER, 1'b0, typ, l1c, bcid};
  endfunction

  function automatic logic [39:0] make_filler(logic [2:0] typ, logic [7:0] l1c, logic [11:0] bcid);
    return {MARKER, 1'b1, typ, l1c, bcid};
  endfunction

  function automatic logic [39:0] make_data(logic [1:0] status, hit_t h);
    return {1'b1, status, h.row, h.col, h.toa, h.tot, h.cal};
  endfunction

  function automatic logic [39:0] make_trailer(logic [16:0] chip_id, logic [5:0] status,
                                               logic [7:0] hits, logic [7:0] crc);
    return {1'b0, chip_id, status, hits, crc};
  endfunction

  function automatic frame_kind_e classify(logic [39:0] f);
    if (f[39])                   return FR_DATA;
    else if (f[39:24] == MARKER) return f[23] ? FR_FILLER : FR_HEADER;
    else                         return FR_TRAILER;
  endfunction

  // CRC-8 (poly 0x2F) over the top NBITS bits of d, MSB first.
  function automatic logic [7:0] crc8_update(logic [7:0] crc, logic [39:0] d, int nbits);
    logic [7:0] c;
    logic       fb;
    c = crc;
    for (int i = 39; i >= 0; i--) begin
      if (i >= 40 - nbits) begin
        fb = c[7] ^ d[i];
        c  = {c[6:0], 1'b0};
        if (fb) c = c ^ CRC_POLY;
      end
    end
    return c;
  endfunction

  function automatic int unsigned popcount8(logic [7:0] v);
    int unsigned n;
    n = 0;
    for (int i = 0; i < 8; i++) n += 32'(v[i]);
    return n;
  endfunction

  // PRBS 2^7-1 (x^7 + x^6 + 1): next 8 bits, first-sent bit in [7].
  function automatic logic [14:0] prbs7_step8(logic [6:0] state);
    logic [6:0] s;
    logic [7:0] out;
    logic       b;
    s = state;
    for (int i = 7; i >= 0; i--) begin
      b      = s[6] ^ s[5];
      out[i] = b;
      s      = {s[5:0], b};
    end
    return {s, out};
  endfunction

endpackage
