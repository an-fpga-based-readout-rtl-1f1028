// readout_controller: event bookkeeping of the digital readout.
//
// L1A handling: every L1A advances an 8-bit L1A counter (cleared by ECR).
// If an event-buffer slot is free, all pixels store the selected crossing's
// word (l1a_push with the shared wr_ptr) and the event's L1A count and
// triggered BCID (bcid - latency, modulo the orbit) are queued. If all
// EB_DEPTH slots are busy the L1A is dropped, counted, and flagged in bit 0
// of the next trailer's status.
//
// Event readout, one action per bunch crossing (bx_en), only while the
// global data stream buffer has room:
//   IDLE   : an event is pending -> write a header record.
//   DATA   : grant the switching network; if a pixel is pending write its
//            hit record (that pixel is marked sent), otherwise write the
//            end record with the hit count and status, release the event
//            slot (ev_pop, rd_ptr advances) and return to IDLE.
// A full buffer withholds the grant: the network stalls (counted in stall_bx).
//
// The flow L1A -> event buffers -> switching network -> global buffer, one
// pixel per crossing, is published; the sequencing, the overflow rule and
// the record contents are this design's choice.
module readout_controller
  import etroc_pkg::*;
#(
  parameter int EB_DEPTH = 8,
  parameter int CB_DEPTH = 512
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        bx_en,
  input  logic                        l1a,
  input  logic                        ecr,
  input  logic [11:0]                 bcid,
  input  logic [$clog2(CB_DEPTH)-1:0] latency,
  input  logic [2:0]                  data_type,
  // event buffers
  output logic                        l1a_push,
  output logic [$clog2(EB_DEPTH)-1:0] wr_ptr,
  output logic                        ev_pop,
  output logic [$clog2(EB_DEPTH)-1:0] rd_ptr,
  // switching network
  output logic                        grant,
  input  logic                        net_valid,
  input  hit_t                        net_data,
  // global data stream buffer
  output logic                        gsb_push,
  output gsb_rec_t                    gsb_rec,
  input  logic                        gsb_full,
  // status
  output logic [15:0]                 l1a_total,
  output logic [15:0]                 l1a_dropped,
  output logic [15:0]                 stall_bx
);

  localparam int PW = $clog2(EB_DEPTH);

  typedef enum logic {S_IDLE, S_DATA} state_e;
  state_e state;

  logic [PW:0]  n_events;      // occupied event slots
  logic [7:0]   l1a_cnt;
  logic [7:0]   hits;
  logic         ovf_flag;      // an L1A was dropped since the last trailer
  logic [19:0]  info_mem [EB_DEPTH];   // {l1a_count, bcid} per slot

  logic accept, finish;
  logic [11:0] trig_bcid;

  always_comb begin
    if (bcid >= 12'(latency)) trig_bcid = bcid - 12'(latency);
    else                      trig_bcid = 12'(ORBIT_BX) + bcid - 12'(latency);
  end

  assign accept   = l1a && (n_events < (PW+1)'(EB_DEPTH));
  assign l1a_push = accept;
  assign grant    = (state == S_DATA) && !gsb_full;
  assign finish   = grant && !net_valid;
  assign ev_pop   = finish;

  always_comb begin
    gsb_push = 1'b0;
    gsb_rec  = '{kind: REC_HEADER, payload: '0};
    if (!gsb_full) begin
      if (state == S_IDLE && n_events != 0) begin
        gsb_push = 1'b1;
        gsb_rec  = '{kind: REC_HEADER, payload: {14'b0, data_type, info_mem[rd_ptr]}};
      end else if (state == S_DATA && net_valid) begin
        gsb_push = 1'b1;
        gsb_rec  = '{kind: REC_HIT, payload: net_data};
      end else if (state == S_DATA) begin
        gsb_push = 1'b1;
        gsb_rec  = '{kind: REC_END, payload: {23'b0, 5'b0, ovf_flag, hits}};
      end
    end
  end

  always_ff @(posedge clk) begin
    if (bx_en && accept) info_mem[wr_ptr] <= {l1a_cnt, trig_bcid};
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state       <= S_IDLE;
      n_events    <= '0;
      wr_ptr      <= '0;
      rd_ptr      <= '0;
      l1a_cnt     <= '0;
      hits        <= '0;
      ovf_flag    <= 1'b0;
      l1a_total   <= '0;
      l1a_dropped <= '0;
      stall_bx    <= '0;
    end else if (bx_en) begin
      if (ecr)      l1a_cnt <= '0;
      else if (l1a) l1a_cnt <= l1a_cnt + 8'd1;
      if (l1a) l1a_total <= l1a_total + 16'd1;
      if (accept) wr_ptr <= wr_ptr + 1'b1;
      if (finish) rd_ptr <= rd_ptr + 1'b1;
      n_events <= n_events + (PW+1)'(accept) - (PW+1)'(finish);
      if (state == S_DATA && gsb_full) stall_bx <= stall_bx + 16'd1;

      if (l1a && !accept) begin
        l1a_dropped <= l1a_dropped + 16'd1;
        ovf_flag    <= 1'b1;
      end else if (finish) begin
        ovf_flag    <= 1'b0;
      end

      unique case (state)
        S_IDLE: if (gsb_push) begin
          state <= S_DATA;
          hits  <= '0;
        end
        S_DATA: begin
          if (grant && net_valid) hits <= hits + 8'd1;
          if (finish) state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
