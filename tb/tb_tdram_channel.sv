// tb_tdram_channel: end-to-end test of one channel (4 rows per bank) driven
// by the behavioural controller tdram_host_model, which predicts and checks
// every HM beat and every DQ beat of the channel clock by clock.
//
// The run must exercise each mechanism of the channel at least once: read and
// write hits and misses of all classes, tag probes (and removal of a read by a
// probe), flush-buffer unloading in a clean-miss read slot, during refresh
// and by an explicit flush read, and commands to different banks that
// overlap in time. A mechanism that never happened counts as a failure.
module tb_tdram_channel;
  timeunit 1ns; timeprecision 100ps;
  import tdram_pkg::*;

  localparam int unsigned ROWS  = 4;
  localparam int unsigned T_RFC = 100;

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
  int   cyc = 0, t0 = 0;

  always #1 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  tdram_channel #(.ROWS(ROWS), .T_RFC(T_RFC)) dut (
    .clk(clk), .rst_n(rst_n), .ca_i(ca), .dq_i(dq_w), .dq_o(dq_r), .dq_oe_o(dq_oe),
    .hm_o(hm), .ready_o(ready), .fb_count_o(fbc), .fb_overflow_o(ovf), .bad_cmd_o(bad));

  tdram_host_model #(.ROWS(ROWS), .N_REQ(1500), .T_RFC(T_RFC), .REF_EVERY(2500), .SEED(7)) host (
    .clk(clk), .rst_n(rst_n), .ca_o(ca), .dq_o(dq_w), .dq_i(dq_r), .dq_oe_i(dq_oe),
    .hm_i(hm), .ready_i(ready), .fb_count_i(fbc), .fb_overflow_i(ovf),
    .done_o(done), .checks_o(hchecks), .failures_o(hfail), .cnt_o(cnt));

  localparam string NAMES [16] = '{"read hit", "read miss clean", "read miss dirty",
    "read miss invalid", "write hit", "write miss clean", "write miss dirty",
    "write miss invalid", "probe", "read removed by probe", "flush in read slot",
    "flush at refresh", "flush by FLRD", "FLRD commands", "overlapped commands", "fills"};

  initial begin
    repeat (400000) @(posedge clk);
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks + hchecks, failures + hfail + 1);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    t0 = cyc;
    // tag mats are swept to zero after reset: ROWS*COLS clocks
    while (!ready) @(posedge clk);
    checks++;
    if (cyc - t0 != ROWS * COLS) begin failures++; $display("FAIL ready after %0d clocks", cyc - t0); end
    while (!done) @(posedge clk);
    checks++;
    if (bad) begin failures++; $display("FAIL bad command flagged"); end
    for (int k = 0; k < 16; k++) begin
      $display("%-22s %0d", NAMES[k], cnt[k]);
      checks++;
      if (cnt[k] == 0) begin failures++; $display("FAIL mechanism never happened: %s", NAMES[k]); end
    end
    $display("cycles %0d", cyc);
    $display("TB_RESULT checks=%0d failures=%0d", checks + hchecks, failures + hfail);
    $finish;
  end
endmodule
