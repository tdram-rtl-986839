// bank_pair: one logical bank of a TDRAM channel and its internal sequencer.
//
// A logical bank is a bank in an even bank group, which also holds the tag
// mats, and the bank with the same index in the neighbouring odd bank group.
// Each holds 32 B of a 64 B line. The controller sends one command and this
// block replicates it to both banks, staggered by tRRD, and runs the ACT, RD,
// WR and PRE steps itself. Two timelines, each counted in clocks from cycle
// 0, the clock after the one in which the command is accepted, are kept:
//
//   tag timeline (ActRd, ActWr, probe), busy for tRC_TAG:
//     0 tag ACT; 15 (tRCD_TAG) tag RD; 16 ECC check, compare, result out on
//     res_valid_o; 17 (tRD+tRTW_TAG) tag WR for ActWr (new tag, valid,
//     dirty bit from the command) and for an ActRd dirty miss (dirty bit
//     cleared, since the dirty line is handed to the controller);
//     20 (tRCD_TAG+tHM_int) result reaches the data banks.
//   data timeline (ActRd, ActWr), busy for tRRD+tRAS+tRP:
//     0 even ACT, 4 odd ACT; 14..17 write data captured from DQ (tWL);
//     24 even RD, 28 odd RD, each only if the column gate is open: reads on
//     a hit or dirty miss, writes on a dirty miss only; 28 even WR, 32 odd
//     WR; 32 (odd RD + tRL_core) evicted dirty line pushed to the flush
//     buffer; 64..67 read beats on DQ (tRRD+tRCD+tRL), or, on a read miss
//     that was granted flush data, a one-cycle fb_slot_o request at 64;
//     56 and 60 auto-precharge of the even and odd bank.
//   A probe uses only the tag timeline and changes no state.
//
// A main command (ActRd, ActWr) needs both timelines idle, a probe only the
// tag timeline; the controller has to respect tag_busy_o and main_busy_o,
// and assertions flag a violation (the command is then ignored).
//
// Follows the paper: parallel tag and data activation, on-die compare,
// column-decode gating, internal hit/miss hand-over to both banks, the read
// before write for dirty write misses, the data timing table. Own choices:
// the exact cycle of each internal step not fixed by a named timing value,
// cleaning the tag on a read dirty miss, the single 64 B DQ burst that starts
// when the odd half is ready.
module bank_pair
  import tdram_pkg::*;
#(
  parameter int unsigned ROWS    = ROWS_DEFAULT,
  parameter int unsigned BANK_ID = 0
) (
  input  logic                   clk,
  input  logic                   rst_n,
  // decoded command addressed to this bank
  input  logic                   cmd_valid_i,
  input  tdram_cmd_t             cmd_i,
  output logic                   tag_busy_o,
  output logic                   main_busy_o,
  output logic                   ready_o,
  // tag check result (cycle 16) and flush-slot grant for read misses
  output logic                   res_valid_o,
  output tag_result_t            res_o,
  input  logic                   fb_grant_i,
  // DQ
  input  logic [DQ_BEAT_W-1:0]   dq_i,
  output logic                   rd_valid_o,
  output logic [DQ_BEAT_W-1:0]   rd_beat_o,
  output logic                   fb_slot_o,
  // evicted dirty line towards the flush buffer
  output logic                   fb_push_o,
  output fb_entry_t              fb_entry_o
);

  localparam int unsigned RW = $clog2(ROWS);
  localparam int unsigned AW = $clog2(ROWS * COLS);

  // --------------------------------------------------------- tag timeline
  logic                 t_act;
  logic [4:0]           t_cnt;
  tdram_cmd_t           t_cmd;
  logic [TAG_ENTRY_W-1:0] t_entry;
  tag_meta_t            t_meta;
  logic                 t_corr, t_unc;
  hm_result_e           t_result;
  logic                 t_rdgate;
  tag_result_t          t_res_q;
  logic                 t_gate_q;
  tag_meta_t            t_wmeta;
  logic [TAG_ENTRY_W-1:0] t_wentry;
  logic                 t_wr;
  logic                 mat_ready;

  // --------------------------------------------------------- data timeline
  logic                 d_act;
  logic [6:0]           d_cnt;
  tdram_cmd_t           d_cmd;
  logic                 d_gate;      // column gate from the internal HM bus
  logic                 d_result_dirty;
  logic                 d_fb_grant;
  logic [TAG_W-1:0]     d_old_tag;
  logic [LINE_W-1:0]    d_wbuf;      // write data staging register
  logic [LINE_W-1:0]    d_rbuf;      // read data / evicted line

  logic                 accept_main, accept_probe;

  assign tag_busy_o  = t_act;
  assign main_busy_o = d_act;
  assign ready_o     = mat_ready;

  assign accept_main  = cmd_valid_i && (cmd_i.op == CMD_ACTRD || cmd_i.op == CMD_ACTWR)
                        && !t_act && !d_act && mat_ready;
  assign accept_probe = cmd_valid_i && cmd_i.op == CMD_PROBE && !t_act && mat_ready;

  // Tag path: read, ECC, compare.
  tag_ecc_decoder u_dec (
    .entry_i(t_entry), .meta_o(t_meta), .corrected_o(t_corr), .uncorrectable_o(t_unc)
  );

  tag_compare u_cmp (
    .is_write_i     (t_cmd.op == CMD_ACTWR),
    .req_tag_i      (t_cmd.tag),
    .stored_i       (t_meta),
    .uncorrectable_i(t_unc),
    .result_o       (t_result),
    .read_data_o    (t_rdgate)
  );

  always_comb begin
    t_wmeta = t_meta;
    if (t_cmd.op == CMD_ACTWR) begin
      t_wmeta.tag   = t_cmd.tag;
      t_wmeta.valid = 1'b1;
      t_wmeta.dirty = t_cmd.dirty;
    end else begin
      t_wmeta.dirty = 1'b0;   // read dirty miss: line handed to the controller
    end
  end

  tag_ecc_encoder u_enc (.meta_i(t_wmeta), .entry_o(t_wentry));

  // tag write at cycle 17 for ActWr, and for an ActRd that found a dirty miss
  assign t_wr = t_act && t_cnt == 5'(OFS_TAG_WR) &&
                (t_cmd.op == CMD_ACTWR ||
                 (t_cmd.op == CMD_ACTRD && t_res_q.result == HM_MISS_DIRTY));

  tag_mat #(.ROWS(ROWS)) u_mat (
    .clk       (clk),
    .rst_n     (rst_n),
    .rd_en_i   (t_act && t_cnt == 5'(OFS_TAG_RD)),
    .rd_addr_i (AW'({t_cmd.row[RW-1:0], t_cmd.col})),
    .rd_entry_o(t_entry),
    .wr_en_i   (t_wr),
    .wr_addr_i (AW'({t_cmd.row[RW-1:0], t_cmd.col})),
    .wr_entry_i(t_wentry),
    .ready_o   (mat_ready)
  );

  // result leaves the bank at cycle 16
  assign res_valid_o  = t_act && t_cnt == 5'(OFS_TAG_RD + 1);
  always_comb begin
    res_o.kind    = (t_cmd.op == CMD_ACTWR) ? KIND_WR :
                    (t_cmd.op == CMD_PROBE) ? KIND_PROBE : KIND_RD;
    res_o.result  = t_result;
    res_o.ecc_err = t_unc;
    res_o.bank    = LBANK_W'(BANK_ID);
    res_o.tag     = t_meta.tag;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      t_act    <= 1'b0;
      t_cnt    <= '0;
      t_cmd    <= '0;
      t_res_q  <= '0;
      t_gate_q <= 1'b0;
    end else begin
      if (accept_main || accept_probe) begin
        t_act <= 1'b1;
        t_cnt <= '0;
        t_cmd <= cmd_i;
      end else if (t_act) begin
        t_cnt <= t_cnt + 1'b1;
        if (t_cnt == 5'(TAG_BUSY - 1)) t_act <= 1'b0;
      end
      if (res_valid_o) begin
        t_res_q  <= res_o;
        t_gate_q <= t_rdgate;
      end
    end
  end

  // --------------------------------------------------------- data banks
  logic                   ev_act, od_act, ev_pre, od_pre;
  logic                   ev_rd, od_rd, ev_wr, od_wr;
  logic [HALF_LINE_W-1:0] ev_q, od_q;
  logic                   ev_qv, od_qv, ev_open, od_open;

  assign ev_act = accept_main;
  assign od_act = d_act && d_cnt == 7'(T_RRD);
  assign ev_rd  = d_act && d_cnt == 7'(OFS_RD_EVEN);
  assign od_rd  = d_act && d_cnt == 7'(OFS_RD_ODD);
  assign ev_wr  = d_act && d_cmd.op == CMD_ACTWR && d_cnt == 7'(OFS_WR_EVEN);
  assign od_wr  = d_act && d_cmd.op == CMD_ACTWR && d_cnt == 7'(OFS_WR_ODD);
  assign ev_pre = d_act && d_cnt == 7'(T_RAS);
  assign od_pre = d_act && d_cnt == 7'(T_RRD + T_RAS);

  data_bank #(.ROWS(ROWS)) u_even (
    .clk(clk), .rst_n(rst_n),
    .act_i(ev_act), .row_i(cmd_i.row[RW-1:0]), .pre_i(ev_pre),
    .rd_i(ev_rd), .wr_i(ev_wr),
    .col_gate_i(ev_wr ? 1'b1 : d_gate), .col_i(d_cmd.col),
    .wr_data_i(d_wbuf[HALF_LINE_W-1:0]),
    .rd_data_o(ev_q), .rd_valid_o(ev_qv), .row_open_o(ev_open)
  );

  data_bank #(.ROWS(ROWS)) u_odd (
    .clk(clk), .rst_n(rst_n),
    .act_i(od_act), .row_i(d_cmd.row[RW-1:0]), .pre_i(od_pre),
    .rd_i(od_rd), .wr_i(od_wr),
    .col_gate_i(od_wr ? 1'b1 : d_gate), .col_i(d_cmd.col),
    .wr_data_i(d_wbuf[LINE_W-1:HALF_LINE_W]),
    .rd_data_o(od_q), .rd_valid_o(od_qv), .row_open_o(od_open)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      d_act          <= 1'b0;
      d_cnt          <= '0;
      d_cmd          <= '0;
      d_gate         <= 1'b0;
      d_result_dirty <= 1'b0;
      d_fb_grant     <= 1'b0;
      d_old_tag      <= '0;
      d_wbuf         <= '0;
      d_rbuf         <= '0;
    end else begin
      if (accept_main) begin
        d_act      <= 1'b1;
        d_cnt      <= '0;
        d_cmd      <= cmd_i;
        d_gate     <= 1'b0;
        d_fb_grant <= 1'b0;
      end else if (d_act) begin
        d_cnt <= d_cnt + 1'b1;
        if (d_cnt == 7'(MAIN_BUSY - 1)) d_act <= 1'b0;
      end
      // flush-slot grant comes with the result at cycle 16
      if (d_act && d_cnt == 7'(OFS_TAG_RD + 1)) d_fb_grant <= fb_grant_i;
      // internal hit/miss bus: result reaches both data banks at cycle 20
      if (d_act && d_cnt == 7'(OFS_HM_INT - 1)) begin
        d_gate         <= t_gate_q;
        d_result_dirty <= (t_res_q.result == HM_MISS_DIRTY);
        d_old_tag      <= t_res_q.tag;
      end
      // write data from the DQ pins, tWL after the command
      if (d_act && d_cmd.op == CMD_ACTWR &&
          d_cnt >= 7'(OFS_DQ_WR) && d_cnt < 7'(OFS_DQ_WR + BEATS_PER_LINE))
        d_wbuf[32'(d_cnt - 7'(OFS_DQ_WR)) * DQ_BEAT_W +: DQ_BEAT_W] <= dq_i;
      if (ev_qv) d_rbuf[HALF_LINE_W-1:0]      <= ev_q;
      if (od_qv) d_rbuf[LINE_W-1:HALF_LINE_W] <= od_q;
    end
  end

  // read beats and flush slot at tRRD+tRCD+tRL
  always_comb begin
    rd_valid_o = 1'b0;
    rd_beat_o  = '0;
    fb_slot_o  = 1'b0;
    if (d_act && d_cmd.op == CMD_ACTRD &&
        d_cnt >= 7'(OFS_DQ_RD) && d_cnt < 7'(OFS_DQ_RD + BEATS_PER_LINE)) begin
      if (d_gate) begin
        rd_valid_o = 1'b1;
        rd_beat_o  = d_rbuf[32'(d_cnt - 7'(OFS_DQ_RD)) * DQ_BEAT_W +: DQ_BEAT_W];
      end else if (d_fb_grant && d_cnt == 7'(OFS_DQ_RD)) begin
        fb_slot_o = 1'b1;
      end
    end
  end

  // dirty line of a write miss moves to the flush buffer
  assign fb_push_o = d_act && d_cmd.op == CMD_ACTWR && d_result_dirty &&
                     d_cnt == 7'(OFS_FB_PUSH);
  always_comb begin
    fb_entry_o.bank = LBANK_W'(BANK_ID);
    fb_entry_o.row  = d_cmd.row;
    fb_entry_o.col  = d_cmd.col;
    fb_entry_o.tag  = d_old_tag;
    fb_entry_o.data = d_rbuf;
  end

  always_ff @(posedge clk) begin
    if (rst_n) a_main_when_busy: assert (!((cmd_valid_i && (cmd_i.op == CMD_ACTRD || cmd_i.op == CMD_ACTWR))) || ((!t_act && !d_act && mat_ready)))
      else $error("a_main_when_busy");
  end
  always_ff @(posedge clk) begin
    if (rst_n) a_probe_when_busy: assert (!((cmd_valid_i && cmd_i.op == CMD_PROBE)) || ((!t_act && mat_ready)))
      else $error("a_probe_when_busy");
  end

  // the tag write (tWR_TAG) must end inside the tag mats' cycle time
  if (OFS_TAG_WR + T_WR_TAG > TAG_BUSY) begin : g_bad_tag_timing
    $error("tag write does not fit in tRC_TAG");
  end

endmodule
