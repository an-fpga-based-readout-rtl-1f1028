// pixel: one emulated pixel of the 16x16 matrix.
//
// Chains the pixel's data source (pixel_data_gen: dummy TDC data or test
// pattern through a multiplexer), its circular buffer and its L1A event
// buffer. On an L1A (l1a_push at bx_en) the word of the crossing `latency`
// BX earlier moves from the circular buffer into the event buffer. The
// oldest event's word, tagged with the pixel address, goes to the pixel's
// switching cell (own_valid/own_data); own_read marks it sent.
// hit_now is this crossing's data-valid bit, used by the trigger path.
// The composition follows the published pixel; the analog chain is
// replaced by the data source, as in the emulator.
module pixel
  import etroc_pkg::*;
#(
  parameter int unsigned ROW      = 0,
  parameter int unsigned COL      = 0,
  parameter int          CB_DEPTH = 512,
  parameter int          EB_DEPTH = 8
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        bx_en,
  input  logic                        mode,
  input  logic [7:0]                  occupancy,
  input  logic                        tp_hit,
  input  logic [$clog2(CB_DEPTH)-1:0] latency,
  input  logic                        l1a_push,
  input  logic [$clog2(EB_DEPTH)-1:0] wr_ptr,
  input  logic                        ev_pop,
  input  logic [$clog2(EB_DEPTH)-1:0] rd_ptr,
  input  logic                        own_read,
  output logic                        own_valid,
  output hit_t                        own_data,
  output logic                        hit_now
);

  tdc_t tdc, delayed, head;

  pixel_data_gen #(.ROW(ROW), .COL(COL)) u_gen (
    .clk, .rst_n, .bx_en, .mode, .occupancy, .tp_hit, .tdc
  );

  circular_buffer #(.DEPTH(CB_DEPTH), .W($bits(tdc_t))) u_cb (
    .clk, .rst_n, .bx_en, .din(tdc), .latency, .dout(delayed)
  );

  l1a_event_buffer #(.DEPTH(EB_DEPTH)) u_eb (
    .clk, .rst_n, .bx_en, .push(l1a_push), .wr_ptr, .din(delayed),
    .pop(ev_pop), .rd_ptr, .read(own_read), .own_valid, .own_tdc(head)
  );

  assign own_data = '{row: 4'(ROW), col: 4'(COL), toa: head.toa, tot: head.tot, cal: head.cal};
  assign hit_now  = tdc.dv;

endmodule
