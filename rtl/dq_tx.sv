// dq_tx: read-direction driver of the 32-bit DQ bus of one channel.
//
// Three sources share the read side of DQ, each at a fixed offset from its
// command so that the controller knows what every beat is:
//   * read data of a bank pair (rd_valid_i / rd_beat_i), beats 64..67 after
//     an ActRd that hit or found a dirty line;
//   * the head line of the flush buffer in the DQ slot of a read miss to a
//     clean or invalid line that was granted flush data (fb_slot_i, one
//     pulse at the slot's first beat);
//   * a group of flush-buffer lines sent back to back, grp_count_i lines,
//     starting tRL after an explicit flush read or a refresh command
//     (grp_start_i at the command's cycle 0).
// A flush line takes four beats (tBURST); the head is popped on its last
// beat. dq_oe_o is high on every driven beat. Bank reads are one-hot by
// construction (the controller spaces bursts); an assertion flags a bank
// read that collides with flush data.
//
// Follows the paper: opportunistic unloading in clean read-miss slots and
// refresh, grouped explicit reads. Own choices: the tRL offset for grouped
// reads and the one-line-per-slot rule.
module dq_tx
  import tdram_pkg::*;
#(
  parameter int unsigned NB    = NUM_LBANKS,
  parameter int unsigned DELAY = OFS_DQ_FB
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic [NB-1:0]          rd_valid_i,
  input  logic [DQ_BEAT_W-1:0]   rd_beat_i [NB],
  input  logic [NB-1:0]          fb_slot_i,
  input  logic                   grp_start_i,
  input  logic [4:0]             grp_count_i,
  input  logic [LINE_W-1:0]      fb_head_i,
  output logic                   fb_pop_o,
  output logic [DQ_BEAT_W-1:0]   dq_o,
  output logic                   dq_oe_o
);

  logic [DELAY-1:0] gv;
  logic [4:0]       gc [DELAY];
  logic             sending;
  logic [1:0]       beat;
  logic [5:0]       left;      // lines still to send, including the current one
  logic [DQ_BEAT_W-1:0] bank_beat;
  logic             start_slot, start_grp;
  logic             fb_beat;

  assign start_slot = |fb_slot_i;
  assign start_grp  = gv[DELAY-1] && gc[DELAY-1] != '0;

  // a new flush line can start when idle or right after the last beat
  assign fb_beat  = sending;
  assign fb_pop_o = sending && beat == 2'd3;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      gv      <= '0;
      sending <= 1'b0;
      beat    <= '0;
      left    <= '0;
      for (int i = 0; i < DELAY; i++) gc[i] <= '0;
    end else begin
      gv    <= {gv[DELAY-2:0], grp_start_i};
      gc[0] <= grp_count_i;
      for (int i = 1; i < DELAY; i++) gc[i] <= gc[i-1];
      if (start_slot || start_grp) begin
        sending <= 1'b1;
        beat    <= 2'd1;
        left    <= start_grp ? 6'(gc[DELAY-1]) : 6'd1;
      end else if (sending) begin
        beat <= beat + 1'b1;
        if (beat == 2'd3) begin
          left <= left - 1'b1;
          if (left == 6'd1) sending <= 1'b0;
        end
      end
    end
  end

  always_comb begin
    bank_beat = '0;
    for (int i = 0; i < NB; i++) if (rd_valid_i[i]) bank_beat = bank_beat | rd_beat_i[i];
    dq_oe_o = 1'b0;
    dq_o    = '0;
    if (start_slot || start_grp) begin
      dq_oe_o = 1'b1;
      dq_o    = fb_head_i[0 +: DQ_BEAT_W];
    end else if (fb_beat) begin
      dq_oe_o = 1'b1;
      dq_o    = fb_head_i[beat * DQ_BEAT_W +: DQ_BEAT_W];
    end else if (|rd_valid_i) begin
      dq_oe_o = 1'b1;
      dq_o    = bank_beat;
    end
  end

  always_ff @(posedge clk) begin
    if (rst_n) a_one_bank: assert ($onehot0(rd_valid_i))
      else $error("a_one_bank");
  end
  always_ff @(posedge clk) begin
    if (rst_n) a_no_collision: assert (!((|rd_valid_i)) || (!(start_slot || start_grp || fb_beat)))
      else $error("a_no_collision");
  end
  always_ff @(posedge clk) begin
    if (rst_n) a_no_restart: assert (!((start_slot || start_grp)) || (!sending))
      else $error("a_no_restart");
  end

endmodule
