// fast_command_generator: DAQ-side source of the 320 Mbps fast-command
// stream, the counterpart of the chip's fast command decoder.
//
// At every bunch-crossing strobe one 8-bit command is chosen and then shifted
// out MSB first over the next 8 clk. Priority: BCR at the last crossing of
// each orbit when auto_bcr is set (so receivers count BCID 0 at the next
// crossing), then a pending ECR request, then a pending L1A request or a
// random L1A (a 16-bit LFSR below l1a_rate, probability l1a_rate/65536 per
// crossing), otherwise IDLE. Requests are pulses held until sent.
// When err_inject is high, bit err_pos of every word sent is flipped, to
// exercise the receiver's single-bit correction.
// The command generator is published; its policy is this design's choice.
module fast_command_generator
  import etroc_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        bx_en,
  input  logic        l1a_req,
  input  logic        ecr_req,
  input  logic [15:0] l1a_rate,
  input  logic        auto_bcr,
  input  logic        err_inject,
  input  logic [2:0]  err_pos,
  output logic        fc,
  output logic [15:0] l1a_sent,
  output logic [15:0] bcr_sent
);

  logic [7:0]  sr;
  logic [11:0] bcid;
  logic [15:0] lfsr;
  logic        l1a_pend, ecr_pend;

  fast_cmd_e   next_cmd;
  logic        rand_l1a;

  assign rand_l1a = (lfsr < l1a_rate);

  always_comb begin
    if (auto_bcr && bcid == 12'(ORBIT_BX - 1)) next_cmd = FC_BCR;
    else if (ecr_pend || ecr_req)              next_cmd = FC_ECR;
    else if (l1a_pend || l1a_req || rand_l1a)  next_cmd = FC_L1A;
    else                                       next_cmd = FC_IDLE;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      sr       <= FC_IDLE;
      bcid     <= '0;
      lfsr     <= 16'hB5C3;
      l1a_pend <= 1'b0;
      ecr_pend <= 1'b0;
      l1a_sent <= '0;
      bcr_sent <= '0;
    end else begin
      if (bx_en) begin
        sr   <= next_cmd ^ (err_inject ? (8'h01 << err_pos) : 8'h00);
        lfsr <= {lfsr[14:0], lfsr[15] ^ lfsr[13] ^ lfsr[12] ^ lfsr[10]};
        if (next_cmd == FC_BCR || bcid == 12'(ORBIT_BX - 1)) bcid <= '0;
        else                                                bcid <= bcid + 12'd1;
        if (next_cmd == FC_L1A) l1a_sent <= l1a_sent + 16'd1;
        if (next_cmd == FC_BCR) bcr_sent <= bcr_sent + 16'd1;
        l1a_pend <= (l1a_pend || l1a_req) && (next_cmd != FC_L1A);
        ecr_pend <= (ecr_pend || ecr_req) && (next_cmd != FC_ECR);
      end else begin
        sr <= {sr[6:0], 1'b0};
        if (l1a_req) l1a_pend <= 1'b1;
        if (ecr_req) ecr_pend <= 1'b1;
      end
    end
  end

  assign fc = sr[7];

endmodule
