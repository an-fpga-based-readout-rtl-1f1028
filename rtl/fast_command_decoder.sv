// fast_command_decoder: recovers 8-bit fast commands from the 320 Mbps
// fast-command (FC) bitstream.
//
// The decoder shifts the serial stream (MSB of each command first) into an
// 8-bit window. While unlocked it looks for an exact IDLE word in the window
// at every bit position; the bit where it is seen becomes the candidate
// command boundary. At each following boundary the window is compared with
// every legal command: distance 0 is accepted, distance 1 is corrected
// (single-bit upset) and distance 2 or more is an error. LOCK_GOOD decodable
// words in a row confirm the boundary (locked); UNLOCK_BAD uncorrectable
// words in a row drop it and the search restarts.
//
// Interface and timing: one fc_bit per clk. cmd_valid pulses for one clk,
// the clk after the last bit of a word entered, while locked; corrected and
// error pulse with it (error words give no cmd_valid).
//
// The 8-bit commands, their Hamming-code protection and the boundary search
// are published behaviour; the code values, the IDLE-based search and the
// lock thresholds are choices of this design.
module fast_command_decoder
  import etroc_pkg::*;
#(
  parameter int LOCK_GOOD  = 4,
  parameter int UNLOCK_BAD = 4
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      fc_bit,
  output logic      cmd_valid,
  output fast_cmd_e cmd,
  output logic      corrected,
  output logic      error,
  output logic      locked
);

  typedef enum logic [1:0] {SEARCH, CONFIRM, LOCKED} state_e;

  state_e     state;
  logic [7:0] win;
  logic [2:0] bitcnt;      // bits received since the last boundary, 7 = word complete
  logic [3:0] good_cnt, bad_cnt;

  logic [7:0] win_next;
  assign win_next = {win[6:0], fc_bit};

  // nearest legal command to the completed word
  logic [7:0] best_code;
  int unsigned best_dist;
  always_comb begin
    best_code = FC_CODES[0];
    best_dist = popcount8(win_next ^ FC_CODES[0]);
    for (int i = 1; i < N_FC; i++) begin
      if (popcount8(win_next ^ FC_CODES[i]) < best_dist) begin
        best_dist = popcount8(win_next ^ FC_CODES[i]);
        best_code = FC_CODES[i];
      end
    end
  end

  logic boundary;
  assign boundary = (bitcnt == 3'd7);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state     <= SEARCH;
      win       <= '0;
      bitcnt    <= '0;
      good_cnt  <= '0;
      bad_cnt   <= '0;
      cmd_valid <= 1'b0;
      cmd       <= FC_IDLE;
      corrected <= 1'b0;
      error     <= 1'b0;
    end else begin
      win       <= win_next;
      bitcnt    <= bitcnt + 3'd1;
      cmd_valid <= 1'b0;
      corrected <= 1'b0;
      error     <= 1'b0;
      unique case (state)
        SEARCH: begin
          if (win_next == FC_IDLE) begin
            bitcnt   <= 3'd0;
            good_cnt <= 4'd1;
            state    <= CONFIRM;
          end
        end
        CONFIRM: begin
          if (boundary) begin
            if (best_dist <= 1) begin
              if (good_cnt + 4'd1 >= 4'(LOCK_GOOD)) begin
                state   <= LOCKED;
                bad_cnt <= '0;
              end
              good_cnt <= good_cnt + 4'd1;
            end else begin
              state <= SEARCH;
            end
          end
        end
        LOCKED: begin
          if (boundary) begin
            if (best_dist <= 1) begin
              cmd_valid <= 1'b1;
              cmd       <= fast_cmd_e'(best_code);
              corrected <= (best_dist == 1);
              bad_cnt   <= '0;
            end else begin
              error   <= 1'b1;
              bad_cnt <= bad_cnt + 4'd1;
              if (bad_cnt + 4'd1 >= 4'(UNLOCK_BAD)) state <= SEARCH;
            end
          end
        end
        default: state <= SEARCH;
      endcase
    end
  end

  assign locked = (state == LOCKED);

endmodule
