// tdram_host_model: behavioural DRAM-cache controller and checker for one
// TDRAM channel (testbench only, not synthesizable).
//
// It plays the memory controller that sits on the processor side: it keeps a
// queue of last-level-cache reads and write-backs to a direct-mapped cache,
// and issues them to the channel as ActRd / ActWr commands (oldest request
// whose bank and DQ slot are free), fills the line after a read miss with a
// clean ActWr, sends tag probes in otherwise idle CA slots to the youngest
// pending read whose tag mats are free (a probe that reports a clean or
// invalid miss removes the read from the queue and turns it into a fill),
// issues refreshes periodically and an explicit flush read when the flush
// buffer gets close to full. Commands are spaced by the device timing: the
// tag mats are busy TAG_BUSY+1 clocks, the data banks MAIN_BUSY+1 clocks,
// and every DQ beat is reserved in a table before a command is issued.
//
// Checking: a mirror of the channel state (tag, dirty bit and data of every
// line, the flush-buffer FIFO and its reservations) predicts, for every
// clock, the HM beat (zero when idle) and the DQ beat (read data, flush data
// or idle). In addition, a memory image tracks the latest value of every
// address, and every read hit must return it. Mechanism counters record
// each access class, probes, probe removals, flush unloads by path, explicit
// flush reads and pipelined commands.
//
// Timing used (D = decode cycle, the clock of the second CA beat):
// result D+17, HM beats D+31/D+32, write data D+15..D+18, read beats
// D+65..D+68, flush push D+33, grouped flush data from D+37.
module tdram_host_model
  import tdram_pkg::*;
#(
  parameter int ROWS   = 4,
  parameter int N_REQ  = 400,
  parameter int T_RFC  = 100,
  parameter int REF_EVERY = 3000,
  parameter int SEED   = 1,
  parameter int WR_PCT = 40,     // share of LLC write-backs after the write-heavy start
  parameter int HEAVY_DIV = 4,   // first N_REQ/HEAVY_DIV requests are 80 % writes (0: none)
  parameter int N_TAGS = 4       // distinct tags per set in the address stream
) (
  input  logic                 clk,
  input  logic                 rst_n,
  output logic [CA_BEAT_W-1:0] ca_o,
  output logic [DQ_BEAT_W-1:0] dq_o,
  input  logic [DQ_BEAT_W-1:0] dq_i,
  input  logic                 dq_oe_i,
  input  logic [HM_BEAT_W-1:0] hm_i,
  input  logic                 ready_i,
  input  logic [FB_CNT_W-1:0]  fb_count_i,
  input  logic                 fb_overflow_i,
  output logic                 done_o,
  output int                   checks_o,
  output int                   failures_o,
  output int                   cnt_o [16]
);

  // mechanism counter indices
  localparam int C_RD_HIT = 0, C_RD_MC = 1, C_RD_MD = 2, C_RD_INV = 3,
                 C_WR_HIT = 4, C_WR_MC = 5, C_WR_MD = 6, C_WR_INV = 7,
                 C_PROBE = 8, C_PROBE_RM = 9, C_FB_SLOT = 10, C_FB_REF = 11,
                 C_FB_FLRD = 12, C_FLRD = 13, C_PIPE = 14, C_FILL = 15;


  typedef struct {
    logic        is_wr;
    logic        fill;     // clean fill after a miss
    int          bank, row, col;
    logic [13:0] tag;
    logic [511:0] data;
    logic        probed;
    int          id;
  } req_t;

  int cyc = 0;
  int checks = 0, failures = 0;
  int cnt [16];
  int max_fb = 0;               // largest flush-buffer occupancy seen

  // mirror of the device
  // (associative, so that a full-size channel costs only what is touched;
  // a missing entry is the all-zero state left by the reset sweep)
  tag_meta_t    mtag [int];
  logic [511:0] mdat [int];
  logic [511:0] fbq [$];
  int           fb_rsv = 0;
  int           fb_pending_push = 0;
  // memory image: latest value of every address
  logic [511:0] mem [longint];

  // expectations
  logic [15:0]  hm_exp [int];
  logic [511:0] rd_exp [int];     // read line expected, keyed by first beat cycle
  int           fb_line_start [int]; // flush line starts, value = 1
  int           push_at [int][$];
  int           res_at  [int][$];   // index into res_info
  typedef struct { int bank; hm_kind_e kind; hm_result_e result; logic [13:0] tag; int d; int rid; } resinfo_t;
  resinfo_t     res_info [$];
  int           grp_at [int];       // group reservation request at cycle
  bit           dq_busy [int];
  int           tag_free [NUM_LBANKS];
  int           main_free [NUM_LBANKS];
  int           ref_until = 0;
  int           next_ref = REF_EVERY;
  req_t         q [$];
  int           removed [int];      // request ids removed by probes (at cycle)
  int           issued = 0, generated = 0, next_id = 0;
  int           flush_left = 0, flush_beat = 0;
  int           last_main_d = -100;
  logic [63:0]  beat2;
  bit           have_beat2 = 0;

  logic [511:0] mdat_old [int];     // line replaced by the last write to a set
  logic [511:0] wr_exp [int];       // write data to drive, keyed by first beat cycle
  bit           grp_kind [int];     // group reservation is a refresh
  int           grp_start [int];    // cycle -> number of flush lines
  bit           slot_at [int];      // flush line in a read slot starts here
  int           wr_left = 0;
  logic [511:0] wr_line;
  logic [511:0] rd_line;
  int           rd_left = 0;
  logic [15:0]  hm_mask [int];      // bits of an HM beat that are defined

  function automatic int lidx(int b, int r, int c);
    return (b * ROWS + r) * COLS + c;
  endfunction

  function automatic longint akey(logic [13:0] t, int b, int r, int c);
    return {t, 8'(b), 16'(r), 8'(c)};
  endfunction

  function automatic logic [511:0] mem_val(longint k);
    logic [511:0] v;
    if (mem.exists(k)) return mem[k];
    for (int i = 0; i < 16; i++) v[i*32 +: 32] = 32'(k) ^ (32'(i) * 32'h9e3779b9);
    return v;
  endfunction

  function automatic logic [511:0] rnd_line();
    logic [511:0] v;
    for (int i = 0; i < 16; i++) v[i*32 +: 32] = $urandom;
    return v;
  endfunction

  function automatic hm_result_e classify(tag_meta_t m, logic [13:0] t);
    if (!m.valid)   return HM_MISS_INVALID;
    if (m.tag == t) return HM_HIT;
    if (m.dirty)    return HM_MISS_DIRTY;
    return HM_MISS_CLEAN;
  endfunction

  task automatic chk(input bit c, input string msg);
    checks++;
    if (!c) begin
      failures++;
      if (failures < 20) $display("FAIL [cycle %0d] %s", cyc, msg);
    end
  endtask

  function automatic bit dq_free(int from, int n);
    for (int i = 0; i < n; i++) if (dq_busy.exists(from + i)) return 0;
    return 1;
  endfunction

  function automatic void dq_take(int from, int n);
    for (int i = 0; i < n; i++) dq_busy[from + i] = 1;
  endfunction

  // new LLC request
  function automatic req_t gen_req();
    req_t r;
    int phase = (HEAVY_DIV > 0 && generated < N_REQ / HEAVY_DIV) ? 0 : 1;  // write-heavy start
    r.is_wr  = (phase == 0) ? ($urandom_range(99, 0) < 80) : ($urandom_range(99, 0) < WR_PCT);
    r.fill   = 0;
    r.bank   = $urandom_range(NUM_LBANKS - 1, 0);
    r.row    = $urandom_range(ROWS - 1, 0);
    r.col    = $urandom_range(3, 0);
    r.tag    = 14'($urandom_range(N_TAGS - 1, 0));
    r.data   = rnd_line();
    r.probed = 0;
    r.id     = next_id++;
    generated++;
    return r;
  endfunction

  // Issue a command decoded at cycle d: update the mirror, schedule
  // expectations.
  task automatic issue(input cmd_op_e op, input req_t r, input int d, input int count);
    logic [63:0] p;
    int          i;
    hm_result_e  res;
    resinfo_t    ri;
    p = '0;
    p[63:61] = op;
    p[60]    = r.is_wr ? ~r.fill : 1'b0;
    p[59:57] = 3'(r.bank);
    p[56:40] = 17'(r.row);
    p[39:35] = 5'(r.col);
    p[34:21] = r.tag;
    p[20:16] = 5'(count);
    beat2 = p;
    have_beat2 = 1;
    ca_o = p[63:32];
    if (r.fill) r.data = mem_val(akey(r.tag, r.bank, r.row, r.col));
    if (op == CMD_ACTRD || op == CMD_ACTWR || op == CMD_PROBE) begin
      i   = lidx(r.bank, r.row, r.col);
      if (!mtag.exists(i)) begin mtag[i] = '0; mdat[i] = '0; end
      res = classify(mtag[i], r.tag);
      ri.bank = r.bank; ri.result = res; ri.tag = mtag[i].tag; ri.d = d; ri.rid = r.id;
      ri.kind = (op == CMD_ACTWR) ? KIND_WR : (op == CMD_PROBE) ? KIND_PROBE : KIND_RD;
      res_info.push_back(ri);
      res_at[d + 17].push_back(res_info.size() - 1);
      tag_free[r.bank] = d + TAG_BUSY + 1;
      if (op == CMD_PROBE) begin
        cnt[C_PROBE]++;
      end else begin
        if (d < last_main_d + MAIN_BUSY) cnt[C_PIPE]++;
        last_main_d = d;
        main_free[r.bank] = d + MAIN_BUSY + 1;
      end
      if (op == CMD_ACTRD) begin
        cnt[res == HM_HIT ? C_RD_HIT : res == HM_MISS_CLEAN ? C_RD_MC :
            res == HM_MISS_DIRTY ? C_RD_MD : C_RD_INV]++;
        dq_take(d + 65, 4);
        if (res == HM_HIT) begin
          rd_exp[d + 65] = mdat[i];
          // the cache must hold the latest value of this address
          chk(mdat[i] == mem_val(akey(r.tag, r.bank, r.row, r.col)), "cache line differs from memory image");
        end else if (res == HM_MISS_DIRTY) begin
          rd_exp[d + 65] = mdat[i];
          chk(mdat[i] == mem_val(akey(mtag[i].tag, r.bank, r.row, r.col)), "dirty line differs from memory image");
          mtag[i].dirty = 1'b0;
        end
      end else if (op == CMD_ACTWR) begin
        if (!r.fill)
          cnt[res == HM_HIT ? C_WR_HIT : res == HM_MISS_CLEAN ? C_WR_MC :
              res == HM_MISS_DIRTY ? C_WR_MD : C_WR_INV]++;
        else cnt[C_FILL]++;
        dq_take(d + 15, 4);
        if (res == HM_MISS_DIRTY) begin
          push_at[d + 33].push_back(i);
          fb_pending_push++;
        end
        // record the evicted data now; the push uses it
        mdat_old[i] = mdat[i];
        mtag[i] = '{dirty: ~r.fill, valid: 1'b1, tag: r.tag};
        mdat[i] = r.data;
        if (!r.fill) mem[akey(r.tag, r.bank, r.row, r.col)] = r.data;
        wr_exp[d + 15] = r.data;
      end
    end else begin
      // FLRD / REF: group reservation at d, data from d+37
      grp_at[d] = (op == CMD_REF) ? FB_DEPTH : count;
      if (op == CMD_FLRD) cnt[C_FLRD]++;
      if (op == CMD_REF) ref_until = d + T_RFC + 1;
      grp_kind[d] = (op == CMD_REF);
    end
  endtask


  assign checks_o   = checks;
  assign failures_o = failures;
  always_comb for (int k = 0; k < 16; k++) cnt_o[k] = cnt[k];

  always @(posedge clk) if (rst_n) cyc <= cyc + 1;

  initial begin
    for (int k = 0; k < 16; k++) cnt[k] = 0;
    for (int b = 0; b < NUM_LBANKS; b++) begin tag_free[b] = 0; main_free[b] = 0; end
    ca_o = '0; dq_o = '0; done_o = 0;
    void'($urandom(SEED));
  end

  // Per clock, at the falling edge: check the device outputs of this cycle,
  // run the flush-buffer mirror, then decide what to drive next cycle.
  always @(negedge clk) begin
    if (rst_n && ready_i && !done_o) begin : step
      int n, avail, g1, gn;
      logic [127:0] exp_beat;
      bit exp_oe;
      n = cyc;
      // occupancy as the device holds it in this cycle
      chk(fb_count_i == FB_CNT_W'(fbq.size()), "flush-buffer count differs from model");
      if (fbq.size() > max_fb) max_fb = fbq.size();
      // ---- reservations made in this cycle (device order: single, then group)
      avail = fbq.size() - fb_rsv;
      g1 = 0;
      if (res_at.exists(n)) begin
        foreach (res_at[n][j]) begin
          resinfo_t ri;
          logic [31:0] pkt;
          bit fbf;
          ri  = res_info[res_at[n][j]];
          fbf = 0;
          if (ri.kind == KIND_RD && (ri.result == HM_MISS_CLEAN || ri.result == HM_MISS_INVALID) && avail > 0) begin
            fbf = 1; g1 = 1; fb_rsv++;
            slot_at[ri.d + 65] = 1;
            cnt[C_FB_SLOT]++;
          end
          pkt = {1'b1, ri.kind, ri.result, fbf, 1'b0, 3'(ri.bank),
                 (ri.result == HM_MISS_INVALID) ? 14'(0) : ri.tag, 8'h00};
          hm_exp[n + 14] = pkt[31:16];
          hm_exp[n + 15] = pkt[15:0];
          // an invalid line has no stored tag: its tag field is not checked
          if (ri.result == HM_MISS_INVALID) begin
            hm_mask[n + 14] = 16'hffc0;
            hm_mask[n + 15] = 16'h00ff;
          end
          // controller reaction when the HM packet arrives
          if (ri.kind == KIND_PROBE && (ri.result == HM_MISS_CLEAN || ri.result == HM_MISS_INVALID))
            removed[ri.rid] = n + 14;
        end
        res_at.delete(n);
      end
      if (grp_at.exists(n)) begin
        gn = (grp_at[n] > avail - g1) ? avail - g1 : grp_at[n];
        fb_rsv += gn;
        if (gn > 0) begin
          grp_start[n + 37] = gn;
          dq_take(n + 37, 4 * gn);
          if (grp_kind[n]) cnt[C_FB_REF] += gn; else cnt[C_FB_FLRD] += gn;
        end
        grp_at.delete(n);
        grp_kind.delete(n);
      end
      // ---- DQ read side
      exp_oe = 0; exp_beat = '0;
      if (slot_at.exists(n)) begin flush_left = 1; flush_beat = 0; slot_at.delete(n); end
      if (grp_start.exists(n)) begin flush_left = grp_start[n]; flush_beat = 0; grp_start.delete(n); end
      if (flush_left > 0) begin
        exp_oe = 1;
        exp_beat = (fbq.size() > 0) ? fbq[0][flush_beat*128 +: 128] : '0;
      end
      if (rd_exp.exists(n)) begin rd_line = rd_exp[n]; rd_left = 4; rd_exp.delete(n); end
      if (rd_left > 0) begin
        exp_oe = 1;
        exp_beat = rd_line[(4 - rd_left) * 128 +: 128];
      end
      chk(dq_oe_i == exp_oe && (!exp_oe || dq_i == exp_beat),
          $sformatf("DQ beat: oe %0b exp %0b, data %h exp %h (read %0d flush %0d/%0d)", dq_oe_i, exp_oe, dq_i[31:0], exp_beat[31:0], rd_left, flush_left, flush_beat));
      if (rd_left > 0) rd_left--;
      if (flush_left > 0) begin
        flush_beat++;
        if (flush_beat == 4) begin
          void'(fbq.pop_front()); fb_rsv--; flush_beat = 0; flush_left--;
        end
      end
      // ---- HM
      begin
        logic [15:0] e, m;
        e = hm_exp.exists(n) ? hm_exp[n] : 16'h0;
        m = hm_mask.exists(n) ? hm_mask[n] : 16'hffff;
        chk((hm_i & m) == (e & m), $sformatf("HM beat %h exp %h", hm_i, e));
        hm_exp.delete(n);
        hm_mask.delete(n);
      end
      // ---- flush buffer pushes at the end of this cycle
      if (push_at.exists(n)) begin
        foreach (push_at[n][j]) begin fbq.push_back(mdat_old[push_at[n][j]]); fb_pending_push--; end
        push_at.delete(n);
      end
      chk(!fb_overflow_i, "flush buffer overflow");

      // ---- drive the rest of this cycle (sampled at its closing edge)
      dq_o = '0;
      if (wr_exp.exists(n)) begin wr_line = wr_exp[n]; wr_left = 4; wr_exp.delete(n); end
      if (wr_left > 0) begin dq_o = wr_line[(4 - wr_left) * 128 +: 128]; wr_left--; end
      if (have_beat2) begin
        ca_o = beat2[31:0];
        have_beat2 = 0;
      end else begin
        ca_o = '0;
        schedule(n + 1);   // a command whose first beat is driven now is decoded at n+1
      end
      if (issued >= N_REQ && q.size() == 0 && n > last_main_d + 120 && fbq.size() == fb_rsv &&
          res_at.size() == 0 && hm_exp.size() == 0 && flush_left == 0 && !have_beat2) begin
        done_o = 1;
      end
    end
  end


  // choose the command whose second beat is decoded at cycle d
  task automatic schedule(input int d);
    req_t r;
    int   pick;
    // drop requests whose probe reported a clean miss (the HM packet has arrived)
    for (int j = q.size() - 1; j >= 0; j--)
      if (removed.exists(q[j].id) && removed[q[j].id] <= d - 2) begin
        req_t f;
        f = q[j];
        q.delete(j);
        removed.delete(f.id);
        cnt[C_PROBE_RM]++;
        f.is_wr = 1; f.fill = 1; f.probed = 0; f.id = next_id++;
        q.push_back(f);
      end
    while (q.size() < 6 && issued + q.size() < N_REQ) q.push_back(gen_req());
    if (d < ref_until) return;
    // refresh when due and all banks idle
    if (d >= next_ref) begin
      bit idle = 1;
      for (int b = 0; b < NUM_LBANKS; b++) if (main_free[b] > d || tag_free[b] > d) idle = 0;
      if (idle && dq_free(d + 37, 4 * FB_DEPTH) && res_at.size() == 0) begin
        r = '{default: 0};
        issue(CMD_REF, r, d, 0);
        next_ref = d + REF_EVERY;
        return;
      end
      return;   // hold new commands until the banks drain
    end
    // explicit flush read when the buffer is getting full
    if (fbq.size() + fb_pending_push - fb_rsv >= FB_DEPTH - 3) begin
      int k = fbq.size() - fb_rsv;
      if (k > 0 && dq_free(d + 37, 4 * k)) begin
        r = '{default: 0};
        issue(CMD_FLRD, r, d, k);
        return;
      end
      if (fbq.size() + fb_pending_push >= FB_DEPTH - 1) return;  // no more writes until it drains
    end
    // MAIN: oldest request with free bank and DQ slot, no older request to the same line
    pick = -1;
    foreach (q[j]) begin
      bit same = 0;
      for (int k = 0; k < j; k++)
        if (q[k].bank == q[j].bank && q[k].row == q[j].row && q[k].col == q[j].col) same = 1;
      if (pick < 0 && !same && removed.exists(q[j].id) == 0 &&
          main_free[q[j].bank] <= d && tag_free[q[j].bank] <= d &&
          (q[j].is_wr ? dq_free(d + 15, 4) : dq_free(d + 65, 4)) &&
          !(q[j].is_wr && fbq.size() + fb_pending_push >= FB_DEPTH - 1))
        pick = j;
    end
    if (pick >= 0) begin
      r = q[pick];
      q.delete(pick);
      issued++;
      if (r.is_wr) issue(CMD_ACTWR, r, d, 0);
      else begin
        issue(CMD_ACTRD, r, d, 0);
        if (res_info[res_info.size()-1].result != HM_HIT) begin
          // miss: fetch from main memory and fill the line (clean)
          r.is_wr = 1; r.fill = 1; r.id = next_id++;
          q.push_back(r);
        end
      end
      return;
    end
    // PROBE: youngest unprobed read whose tag mats are free
    for (int j = q.size() - 1; j >= 0; j--) begin
      bit same = 0;
      for (int k = 0; k < j; k++)
        if (q[k].bank == q[j].bank && q[k].row == q[j].row && q[k].col == q[j].col) same = 1;
      if (!q[j].is_wr && !q[j].probed && !same && tag_free[q[j].bank] <= d) begin
        q[j].probed = 1;
        issue(CMD_PROBE, q[j], d, 0);
        return;
      end
    end
  endtask

endmodule
