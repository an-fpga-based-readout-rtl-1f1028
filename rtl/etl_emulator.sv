// etl_emulator: the FPGA of the emulator board.
//
// The ETROC side holds N_CHIPS ETROC2 emulators (etroc_emu). The board has
// only two fast-command pairs; each pair feeds two chips, so chip i listens
// to fc_in[i / 2]. Every chip drives its own DOL and DOR outputs.
// The DAQ side emulates the readout board's counterparts: one fast command
// generator driving both fc_out pairs, and one data checker for each DOL and
// DOR input (lanes 2*i and 2*i+1 for chip i of the board under test).
// With loopback cables fc_out -> fc_in and dol/dor -> dol_in/dor_in the
// board tests itself; two boards can also check each other.
//
// All logic runs on the 320 MHz clock `clk` that the PLL derives from
// CLK40; the PLL, the clock fanout chip, the I/O standards and the I2C
// target are outside this RTL, so the per-chip slow-control registers
// (cfg) and the DAQ controls are ports.
module etl_emulator
  import etroc_pkg::*;
#(
  parameter int N_CHIPS  = 4,
  parameter int CB_DEPTH = 512,
  parameter int EB_DEPTH = 8
) (
  input  logic          clk,
  input  logic          rst_n,
  // ETROC emulator side
  input  logic [1:0]    fc_in,
  input  etroc_cfg_t    cfg    [N_CHIPS],
  output logic [N_CHIPS-1:0] dol,
  output logic [N_CHIPS-1:0] dor,
  output etroc_status_t status [N_CHIPS],
  // DAQ emulator side
  output logic [1:0]    fc_out,
  input  logic          l1a_req,
  input  logic          ecr_req,
  input  logic [15:0]   l1a_rate,
  input  logic          auto_bcr,
  input  logic          err_inject,
  input  logic [2:0]    err_pos,
  output logic [15:0]   l1a_sent,
  output logic [15:0]   bcr_sent,
  input  logic [N_CHIPS-1:0] dol_in,
  input  logic [N_CHIPS-1:0] dor_in,
  input  logic [2:0]    chk_n_trig  [N_CHIPS],
  input  logic [16:0]   chk_chip_id [N_CHIPS],
  input  logic          chk_descramble,
  input  logic          chk_prbs,
  output logic [39:0]   chk_word    [2*N_CHIPS],
  output logic          chk_word_dv [2*N_CHIPS],
  output logic [5:0]    chk_trig    [2*N_CHIPS],
  output checker_cnt_t  chk_cnt     [2*N_CHIPS]
);

  logic        bx_en_chip [N_CHIPS];
  logic [11:0] bcid_chip  [N_CHIPS];

  for (genvar i = 0; i < N_CHIPS; i++) begin : g_chip
    etroc_emu #(.CB_DEPTH(CB_DEPTH), .EB_DEPTH(EB_DEPTH)) u_etroc (
      .clk, .rst_n, .fc(fc_in[(i / 2) % 2]), .cfg(cfg[i]),
      .dol(dol[i]), .dor(dor[i]), .bx_en(bx_en_chip[i]), .bcid(bcid_chip[i]),
      .status(status[i])
    );
  end

  // DAQ emulator BX strobe
  logic [2:0] phase;
  logic       bx_en;
  always_ff @(posedge clk) begin
    if (!rst_n) phase <= '0;
    else        phase <= phase + 3'd1;
  end
  assign bx_en = (phase == 3'd7);

  logic fc_gen;
  fast_command_generator u_cmdgen (
    .clk, .rst_n, .bx_en, .l1a_req, .ecr_req, .l1a_rate, .auto_bcr,
    .err_inject, .err_pos, .fc(fc_gen), .l1a_sent, .bcr_sent
  );
  assign fc_out = {2{fc_gen}};

  frame_kind_e kind_unused [2*N_CHIPS];
  logic        trig_v_unused [2*N_CHIPS];
  for (genvar j = 0; j < 2 * N_CHIPS; j++) begin : g_chk
    data_checker u_chk (
      .clk, .rst_n,
      .din((j % 2 == 0) ? dol_in[j / 2] : dor_in[j / 2]),
      .n_trig(chk_n_trig[j / 2]), .chip_id(chk_chip_id[j / 2]),
      .descramble_en(chk_descramble), .prbs_en(chk_prbs),
      .word(chk_word[j]), .word_dv(chk_word_dv[j]), .word_kind(kind_unused[j]),
      .trig(chk_trig[j]), .trig_valid(trig_v_unused[j]), .cnt(chk_cnt[j])
    );
  end

endmodule
