// tb_bank_pair: drives random ActRd, ActWr and probe commands into one
// logical bank (4 rows) and checks, cycle by cycle against a reference cache
// model, the whole internal timeline: the tag-check result exactly 16 clocks
// after cycle 0 with the right class and stored tag, read beats at 64..67
// only for hits and dirty misses, the flush-slot request at 64 for a granted
// clean miss, the evicted line pushed to the flush buffer at 32 for a dirty
// write miss, the busy flags, and a probe accepted while the data banks of a
// previous command are still busy.
module tb_bank_pair;
  timeunit 1ns; timeprecision 100ps;
  import tdram_pkg::*;
  localparam int unsigned ROWS = 4;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic cv = 0, grant = 0;
  tdram_cmd_t cmd;
  logic tbusy, mbusy, ready, rv, rdv, slot, push;
  tag_result_t res;
  logic [127:0] dq = '0, rdb;
  fb_entry_t fbe;

  // reference model
  tag_meta_t   mtag [ROWS*COLS];
  logic [511:0] mdat [ROWS*COLS];
  int n_hit = 0, n_mc = 0, n_md = 0, n_inv = 0, n_probe = 0, n_overlap = 0;

  always #1 clk = ~clk;

  bank_pair #(.ROWS(ROWS), .BANK_ID(5)) dut (
    .clk(clk), .rst_n(rst_n), .cmd_valid_i(cv), .cmd_i(cmd),
    .tag_busy_o(tbusy), .main_busy_o(mbusy), .ready_o(ready),
    .res_valid_o(rv), .res_o(res), .fb_grant_i(grant),
    .dq_i(dq), .rd_valid_o(rdv), .rd_beat_o(rdb), .fb_slot_o(slot),
    .fb_push_o(push), .fb_entry_o(fbe));

  task automatic chk(input logic c, input string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", msg); end
  endtask

  function automatic logic [511:0] rnd_line();
    logic [511:0] v;
    for (int i = 0; i < 16; i++) v[i*32 +: 32] = $urandom;
    return v;
  endfunction

  function automatic hm_result_e classify(tag_meta_t m, logic [13:0] t);
    if (!m.valid)      return HM_MISS_INVALID;
    if (m.tag == t)    return HM_HIT;
    if (m.dirty)       return HM_MISS_DIRTY;
    return HM_MISS_CLEAN;
  endfunction

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    cmd = '0;
    for (int i = 0; i < ROWS*COLS; i++) begin mtag[i] = '0; mdat[i] = '0; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    while (!ready) @(posedge clk);
    for (int n = 0; n < 300; n++) begin
      cmd_op_e op;
      int r, c, idx, span;
      logic [13:0] t;
      hm_result_e exp, pexp;
      logic [511:0] wline, old;
      tag_meta_t oldm;
      logic do_probe, pgrant;
      logic [13:0] pt;
      int pr, pc;
      logic got_res, got_pres;

      op = ($urandom_range(4, 0) < 2) ? CMD_ACTRD : ($urandom_range(4, 0) < 4) ? CMD_ACTWR : CMD_PROBE;
      r = $urandom_range(ROWS-1, 0); c = $urandom_range(3, 0); idx = r*COLS + c;
      t = 14'($urandom_range(3, 0));
      oldm = mtag[idx]; old = mdat[idx];
      exp = classify(oldm, t);
      wline = rnd_line();
      do_probe = (op != CMD_PROBE) && ($urandom_range(1, 0) == 1);
      pr = $urandom_range(ROWS-1, 0); pc = $urandom_range(3, 0); pt = 14'($urandom_range(3, 0));
      got_res = 0; got_pres = 0;

      @(negedge clk);
      cmd = '0; cmd.op = op; cmd.row = 17'(r); cmd.col = 5'(c); cmd.tag = t; cmd.dirty = 1'($urandom);
      cv = 1;
      chk(!tbusy && !mbusy, "bank busy before a new command");
      // model update (tag written at cycle 17, data at 28/32)
      if (op == CMD_ACTWR) begin
        mtag[idx] = '{dirty: cmd.dirty, valid: 1'b1, tag: t};
        mdat[idx] = wline;
      end else if (op == CMD_ACTRD && exp == HM_MISS_DIRTY) begin
        mtag[idx].dirty = 1'b0;
      end
      if (op == CMD_PROBE) n_probe++;
      else case (exp)
        HM_HIT: n_hit++; HM_MISS_CLEAN: n_mc++; HM_MISS_DIRTY: n_md++; default: n_inv++;
      endcase
      span = (op == CMD_PROBE) ? 20 : MAIN_BUSY + 1;
      for (int k = -1; k < span; k++) begin
        // k is the cycle number of the timeline (cycle 0 = clock after accept)
        @(negedge clk);
        cv = 0;
        grant = 0;
        dq = '0;
        if (op == CMD_ACTWR && k + 1 >= OFS_DQ_WR && k + 1 < OFS_DQ_WR + 4)
          dq = wline[(k + 1 - OFS_DQ_WR) * 128 +: 128];
        if (do_probe && k + 1 == 30) begin
          // probe while the data banks are still busy
          chk(!tbusy && mbusy, "tag mats should be free, data banks busy at cycle 30");
          cmd = '0; cmd.op = CMD_PROBE; cmd.row = 17'(pr); cmd.col = 5'(pc); cmd.tag = pt;
          cv = 1;
          pexp = classify(mtag[pr*COLS + pc], pt);
          n_overlap++;
        end
        #0.1;
        // result of the main command / probe
        if (k + 1 == OFS_TAG_RD + 1) begin
          chk(rv && res.result == exp && res.bank == 3'd5 &&
              res.kind == ((op == CMD_ACTWR) ? KIND_WR : (op == CMD_PROBE) ? KIND_PROBE : KIND_RD) &&
              (exp == HM_MISS_INVALID || res.tag == oldm.tag),
              $sformatf("op %0d result %0d expected %0d (rv=%0b)", op, res.result, exp, rv));
          got_res = rv;
          if (op == CMD_ACTRD && (exp == HM_MISS_CLEAN || exp == HM_MISS_INVALID)) grant = 1'($urandom);
        end else if (do_probe && k + 1 == 30 + OFS_TAG_RD + 2) begin
          chk(rv && res.kind == KIND_PROBE && res.result == pexp, "probe during busy data banks: wrong result");
        end else begin
          chk(!rv, $sformatf("unexpected result at cycle %0d", k + 1));
        end
        if (k + 1 == OFS_TAG_RD + 1 && grant) pgrant = 1; else if (k + 1 == OFS_TAG_RD + 1) pgrant = 0;
        // DQ read beats
        if (op == CMD_ACTRD && k + 1 >= OFS_DQ_RD && k + 1 < OFS_DQ_RD + 4 &&
            (exp == HM_HIT || exp == HM_MISS_DIRTY))
          chk(rdv && rdb == old[(k + 1 - OFS_DQ_RD) * 128 +: 128],
              $sformatf("read beat %0d wrong", k + 1 - OFS_DQ_RD));
        else
          chk(!rdv, $sformatf("unexpected read beat at cycle %0d", k + 1));
        chk(slot == (op == CMD_ACTRD && pgrant && k + 1 == OFS_DQ_RD), "flush slot request wrong");
        // flush push
        if (op == CMD_ACTWR && exp == HM_MISS_DIRTY && k + 1 == OFS_FB_PUSH)
          chk(push && fbe.data == old && fbe.tag == oldm.tag && fbe.bank == 3'd5 &&
              fbe.row == 17'(r) && fbe.col == 5'(c), "evicted dirty line wrong");
        else
          chk(!push, $sformatf("unexpected flush push at cycle %0d", k + 1));
      end
      @(negedge clk);
      while (tbusy || mbusy) @(negedge clk);
    end
    chk(n_hit > 0 && n_mc > 0 && n_md > 0 && n_inv > 0 && n_probe > 0 && n_overlap > 0,
        $sformatf("coverage hit %0d mc %0d md %0d inv %0d probe %0d overlap %0d",
                  n_hit, n_mc, n_md, n_inv, n_probe, n_overlap));
    $display("hit %0d miss-clean %0d miss-dirty %0d invalid %0d probe %0d overlapped probes %0d",
             n_hit, n_mc, n_md, n_inv, n_probe, n_overlap);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
