// tb_tdram_cache_mix: one channel under cache traffic shaped like the
// evaluated workloads: mostly reads, a minority of last-level-cache
// write-backs, a working set several times larger than the cache (eight
// tags compete for every line), periodic refresh every 7800 clocks (3.9 us)
// and probes in idle command slots. It reports how the flush buffer was
// emptied (free read slots, refresh, explicit flush reads), the largest
// occupancy reached and the hit ratio, and checks every HM and DQ beat and
// the buffer occupancy against the controller model clock by clock.
//
// With a 16-entry buffer such traffic is expected to drain the buffer
// through clean-miss read slots and refresh alone; the test checks that the
// buffer never overflowed and that most lines left that way (not by
// explicit flush reads).
module tb_tdram_cache_mix;
  timeunit 1ns; timeprecision 100ps;
  import tdram_pkg::*;

  localparam int unsigned ROWS  = 4;
  localparam int unsigned T_RFC = T_RFC_DEFAULT;

  logic clk = 0, rst_n = 0;
  logic [CA_BEAT_W-1:0] ca;
  logic [DQ_BEAT_W-1:0] dq_w, dq_r;
  logic dq_oe, ready, ovf, bad;
  logic [HM_BEAT_W-1:0] hm;
  logic [FB_CNT_W-1:0]  fbc;
  logic done;
  int   hchecks, hfail;
  int   cnt [16];
  int   checks = 0, failures = 0;
  int   cyc = 0, busy_beats = 0;

  always #1 clk = ~clk;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (dq_oe) busy_beats <= busy_beats + 1;
  end

  tdram_channel #(.ROWS(ROWS), .T_RFC(T_RFC)) dut (
    .clk(clk), .rst_n(rst_n), .ca_i(ca), .dq_i(dq_w), .dq_o(dq_r), .dq_oe_o(dq_oe),
    .hm_o(hm), .ready_o(ready), .fb_count_o(fbc), .fb_overflow_o(ovf), .bad_cmd_o(bad));

  tdram_host_model #(.ROWS(ROWS), .N_REQ(4000), .T_RFC(T_RFC), .REF_EVERY(7800),
                     .SEED(23), .WR_PCT(30), .HEAVY_DIV(0), .N_TAGS(8)) host (
    .clk(clk), .rst_n(rst_n), .ca_o(ca), .dq_o(dq_w), .dq_i(dq_r), .dq_oe_i(dq_oe),
    .hm_i(hm), .ready_i(ready), .fb_count_i(fbc), .fb_overflow_i(ovf),
    .done_o(done), .checks_o(hchecks), .failures_o(hfail), .cnt_o(cnt));

  initial begin
    repeat (1000000) @(posedge clk);
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks + hchecks, failures + hfail + 1);
    $finish;
  end

  initial begin
    int reads, hits, unload, by_flrd;
    repeat (3) @(posedge clk);
    rst_n = 1;
    while (!done) @(posedge clk);
    reads   = cnt[0] + cnt[1] + cnt[2] + cnt[3];
    hits    = cnt[0];
    unload  = cnt[10] + cnt[11] + cnt[12];
    by_flrd = cnt[12];
    $display("reads %0d, read hit ratio %0d %%", reads, reads ? 100 * hits / reads : 0);
    $display("write-backs %0d, dirty write misses %0d", cnt[4] + cnt[5] + cnt[6] + cnt[7], cnt[6]);
    $display("flush lines unloaded: read slots %0d, refresh %0d, explicit %0d",
             cnt[10], cnt[11], cnt[12]);
    $display("largest flush-buffer occupancy %0d of %0d", host.max_fb, FB_DEPTH);
    $display("probes %0d, reads retired by a probe %0d", cnt[8], cnt[9]);
    $display("DQ busy %0d of %0d clocks", busy_beats, cyc);
    checks++;
    if (ovf) begin failures++; $display("FAIL flush buffer overflowed"); end
    checks++;
    if (cnt[6] == 0 || unload == 0) begin failures++; $display("FAIL no dirty write miss was buffered"); end
    checks++;
    if (2 * by_flrd > unload) begin failures++; $display("FAIL most flush lines needed explicit reads"); end
    checks++;
    if (cnt[11] == 0 || cnt[10] == 0) begin failures++; $display("FAIL an opportunistic unload path was never used"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks + hchecks, failures + hfail);
    $finish;
  end
endmodule
