// tdram_channel: one independent TDRAM channel.
//
// TDRAM turns each HBM3 pseudo-channel into a channel of its own with an
// 8-bit CA bus, a 32-bit DQ bus and a 4-bit HM bus. Inside, the base-die
// logic decodes commands (ca_decoder), hands ActRd, ActWr and probe commands
// to the addressed logical bank (bank_pair, one per even/odd bank-group
// pair), forwards each tag-check result to the HM bus driver (hm_bus_tx),
// collects dirty lines evicted by write misses in the shared flush buffer and
// drives read data and flush data on DQ (dq_tx).
//
// Flush-data reservations are made here. When a read result is a miss to a
// clean or invalid line, its DQ slot will be empty, so one flush entry is
// reserved for it and the HM packet's fb_data flag tells the controller that
// the slot carries flush data. An explicit flush read (FLRD, count field) or
// a refresh (REF) reserves up to count / all available entries and dq_tx sends
// them back to back tRL later. A refresh also blocks all banks for T_RFC
// clocks; commands during that window violate an assertion.
//
// Interface per clock: ca_i one CA beat, dq_i one incoming DQ beat (write
// data tWL after an ActWr), dq_o/dq_oe_o one outgoing DQ beat, hm_o one HM
// beat. Cycle 0 of a command is the clock after its second CA beat. ready_o rises when the tag mats have been initialised. status:
// fb_count_o, fb_overflow_o (sticky), bad_cmd_o. Timing of every command is
// listed in bank_pair.
//
// Follows the paper: channel organisation, buses, the flush-buffer unloading
// rules. Own choices: the reservation scheme, the HM flag, T_RFC.
//
// Lint note: only the data field of the flush-buffer head is read here; the
// bank, row, column and tag stored with each entry describe where the line
// came from and are kept for observation and debug (the controller already
// knows them from the HM packets of its dirty misses).
module tdram_channel
  import tdram_pkg::*;
#(
  parameter int unsigned ROWS   = ROWS_DEFAULT,
  parameter int unsigned T_RFC  = T_RFC_DEFAULT
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic [CA_BEAT_W-1:0]   ca_i,
  input  logic [DQ_BEAT_W-1:0]   dq_i,
  output logic [DQ_BEAT_W-1:0]   dq_o,
  output logic                   dq_oe_o,
  output logic [HM_BEAT_W-1:0]   hm_o,
  output logic                   ready_o,
  output logic [FB_CNT_W-1:0]    fb_count_o,
  output logic                   fb_overflow_o,
  output logic                   bad_cmd_o
);

  localparam int unsigned NB = NUM_LBANKS;

  logic          cmd_valid;
  tdram_cmd_t    cmd;

  ca_decoder u_ca (
    .clk(clk), .rst_n(rst_n), .ca_i(ca_i),
    .cmd_valid_o(cmd_valid), .cmd_o(cmd), .bad_cmd_o(bad_cmd_o)
  );

  // refresh window
  logic [$clog2(T_RFC+1)-1:0] rfc_cnt;
  logic                       in_refresh;
  assign in_refresh = (rfc_cnt != '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                                rfc_cnt <= '0;
    else if (cmd_valid && cmd.op == CMD_REF)   rfc_cnt <= ($clog2(T_RFC+1))'(T_RFC);
    else if (in_refresh)                       rfc_cnt <= rfc_cnt - 1'b1;
  end

  // bank pairs
  logic [NB-1:0]          bk_sel, bk_tag_busy, bk_main_busy, bk_ready;
  logic [NB-1:0]          bk_res_v, bk_rd_v, bk_fb_slot, bk_fb_push;
  tag_result_t            bk_res [NB];
  logic [DQ_BEAT_W-1:0]   bk_rd_beat [NB];
  fb_entry_t              bk_fb_entry [NB];
  logic                   fb_grant1;

  for (genvar b = 0; b < NB; b++) begin : g_bank
    assign bk_sel[b] = cmd_valid && cmd.bank == LBANK_W'(b) &&
                       (cmd.op == CMD_ACTRD || cmd.op == CMD_ACTWR || cmd.op == CMD_PROBE);
    bank_pair #(.ROWS(ROWS), .BANK_ID(b)) u_bp (
      .clk(clk), .rst_n(rst_n),
      .cmd_valid_i(bk_sel[b]), .cmd_i(cmd),
      .tag_busy_o(bk_tag_busy[b]), .main_busy_o(bk_main_busy[b]), .ready_o(bk_ready[b]),
      .res_valid_o(bk_res_v[b]), .res_o(bk_res[b]), .fb_grant_i(fb_grant1),
      .dq_i(dq_i), .rd_valid_o(bk_rd_v[b]), .rd_beat_o(bk_rd_beat[b]),
      .fb_slot_o(bk_fb_slot[b]),
      .fb_push_o(bk_fb_push[b]), .fb_entry_o(bk_fb_entry[b])
    );
  end

  assign ready_o = &bk_ready;

  // one result per clock at most: merge
  logic        res_v;
  tag_result_t res;
  logic        fb_push;
  fb_entry_t   fb_push_entry;

  always_comb begin
    res_v         = |bk_res_v;
    res           = '0;
    fb_push       = |bk_fb_push;
    fb_push_entry = '0;
    for (int b = 0; b < NB; b++) begin
      if (bk_res_v[b])   res           = bk_res[b];
      if (bk_fb_push[b]) fb_push_entry = bk_fb_entry[b];
    end
  end

  // flush buffer and reservations
  logic            rsv1;
  logic [4:0]      rsvn_req, rsvn_grant;
  logic            fb_pop, fb_full;
  fb_entry_t       fb_head;
  logic [FB_CNT_W-1:0] fb_avail;

  assign rsv1 = res_v && res.kind == KIND_RD &&
                (res.result == HM_MISS_CLEAN || res.result == HM_MISS_INVALID);
  always_comb begin
    rsvn_req = '0;
    if (cmd_valid && cmd.op == CMD_FLRD) rsvn_req = cmd.count;
    if (cmd_valid && cmd.op == CMD_REF)  rsvn_req = 5'(FB_DEPTH);
  end

  flush_buffer #(.DEPTH(FB_DEPTH)) u_fb (
    .clk(clk), .rst_n(rst_n),
    .push_i(fb_push), .push_entry_i(fb_push_entry),
    .pop_i(fb_pop), .head_o(fb_head),
    .rsv1_i(rsv1), .rsv1_grant_o(fb_grant1),
    .rsvn_req_i(rsvn_req), .rsvn_grant_o(rsvn_grant),
    .count_o(fb_count_o), .avail_o(fb_avail),
    .full_o(fb_full), .overflow_o(fb_overflow_o)
  );

  hm_bus_tx u_hm (
    .clk(clk), .rst_n(rst_n),
    .res_valid_i(res_v), .res_i(res), .fb_data_i(fb_grant1), .hm_o(hm_o)
  );

  // grouped flush data starts tRL after cycle 0, the clock after decode
  dq_tx #(.NB(NB), .DELAY(OFS_DQ_FB + 1)) u_dq (
    .clk(clk), .rst_n(rst_n),
    .rd_valid_i(bk_rd_v), .rd_beat_i(bk_rd_beat), .fb_slot_i(bk_fb_slot),
    .grp_start_i(cmd_valid && (cmd.op == CMD_FLRD || cmd.op == CMD_REF)),
    .grp_count_i(rsvn_grant),
    .fb_head_i(fb_head.data), .fb_pop_o(fb_pop),
    .dq_o(dq_o), .dq_oe_o(dq_oe_o)
  );

  always_ff @(posedge clk) begin
    if (rst_n) a_one_result: assert ($onehot0(bk_res_v))
      else $error("a_one_result");
  end
  always_ff @(posedge clk) begin
    if (rst_n) a_one_push: assert ($onehot0(bk_fb_push))
      else $error("a_one_push");
  end
  always_ff @(posedge clk) begin
    if (rst_n) a_no_cmd_in_refresh: assert (!(in_refresh) || (!(|bk_sel)))
      else $error("a_no_cmd_in_refresh");
  end
  // the controller must respect each bank's busy time (checked here once
  // more at channel level; the bank pair ignores such a command)
  always_ff @(posedge clk) begin
    if (rst_n) a_no_cmd_to_busy_bank: assert ((bk_sel & bk_tag_busy) == '0 &&
        (bk_sel & bk_main_busy & ~{NB{cmd.op == CMD_PROBE}}) == '0)
      else $error("a_no_cmd_to_busy_bank");
  end
  always_ff @(posedge clk) begin
    if (rst_n) a_no_overflow: assert (!(fb_push) || (!fb_full))
      else $error("a_no_overflow");
  end

endmodule
