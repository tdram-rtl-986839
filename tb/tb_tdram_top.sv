// tb_tdram_top: end-to-end test of the device with two channels of 4 rows
// per bank. Each channel is driven by its own controller model
// (tdram_host_model) with a different random stream, so the channels run
// different command mixes at the same time and must not disturb each other.
// Every HM and DQ beat of both channels is predicted and checked clock by
// clock. Afterwards an undefined opcode is sent on channel 0 only, and its
// bad-command flag must rise there and nowhere else.
//
// Every mechanism the device implements must occur at least once on each
// channel (summed counts are printed): all hit/miss classes for reads and
// writes, probes and probe-removed reads, the three ways of unloading the
// flush buffer (clean-miss read slot, refresh, explicit flush read), and
// commands overlapping in different banks. One that never occurred counts as
// a failure.
module tb_tdram_top;
  timeunit 1ns; timeprecision 100ps;
  import tdram_pkg::*;

  localparam int unsigned CH    = 2;
  localparam int unsigned ROWS  = 4;
  localparam int unsigned T_RFC = 100;

  logic clk = 0, rst_n = 0;
  logic [CA_BEAT_W-1:0] ca [CH], ca_h [CH];
  logic [DQ_BEAT_W-1:0] dq_w [CH], dq_r [CH];
  logic                 dq_oe [CH], ready [CH], ovf [CH], bad [CH];
  logic [HM_BEAT_W-1:0] hm [CH];
  logic [FB_CNT_W-1:0]  fbc [CH];
  logic                 done [CH];
  int                   hchecks [CH], hfail [CH];
  int                   cnt [CH][16];
  logic                 inject = 0;
  logic [CA_BEAT_W-1:0] inject_beat = '0;
  int checks = 0, failures = 0, cyc = 0;

  always #1 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  always_comb for (int c = 0; c < CH; c++) ca[c] = (inject && c == 0) ? inject_beat : ca_h[c];

  tdram_top #(.CHANNELS(CH), .ROWS(ROWS), .T_RFC(T_RFC)) dut (
    .clk(clk), .rst_n(rst_n), .ca_i(ca), .dq_i(dq_w), .dq_o(dq_r), .dq_oe_o(dq_oe),
    .hm_o(hm), .ready_o(ready), .fb_count_o(fbc), .fb_overflow_o(ovf), .bad_cmd_o(bad));

  for (genvar c = 0; c < CH; c++) begin : g_host
    tdram_host_model #(.ROWS(ROWS), .N_REQ(1200 + 300 * c), .T_RFC(T_RFC),
                       .REF_EVERY(2500), .SEED(11 + 17 * c)) host (
      .clk(clk), .rst_n(rst_n), .ca_o(ca_h[c]), .dq_o(dq_w[c]), .dq_i(dq_r[c]),
      .dq_oe_i(dq_oe[c]), .hm_i(hm[c]), .ready_i(ready[c]), .fb_count_i(fbc[c]),
      .fb_overflow_i(ovf[c]), .done_o(done[c]), .checks_o(hchecks[c]),
      .failures_o(hfail[c]), .cnt_o(cnt[c]));
  end

  localparam string NAMES [16] = '{"read hit", "read miss clean", "read miss dirty",
    "read miss invalid", "write hit", "write miss clean", "write miss dirty",
    "write miss invalid", "probe", "read removed by probe", "flush in read slot",
    "flush at refresh", "flush by FLRD", "FLRD commands", "overlapped commands", "fills"};

  function automatic int total_checks();
    int s = checks;
    for (int c = 0; c < CH; c++) s += hchecks[c];
    return s;
  endfunction
  function automatic int total_failures();
    int s = failures;
    for (int c = 0; c < CH; c++) s += hfail[c];
    return s;
  endfunction

  initial begin
    repeat (600000) @(posedge clk);
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", total_checks(), total_failures() + 1);
    $finish;
  end

  initial begin
    bit all_done;
    repeat (3) @(posedge clk);
    rst_n = 1;
    do begin
      @(posedge clk);
      all_done = 1;
      for (int c = 0; c < CH; c++) if (!done[c]) all_done = 0;
    end while (!all_done);
    // undefined opcode (7) on channel 0
    for (int c = 0; c < CH; c++) begin
      checks++;
      if (bad[c]) begin failures++; $display("FAIL bad-command flag set early on channel %0d", c); end
    end
    @(negedge clk); inject = 1; inject_beat = {3'd7, 29'h0};
    @(negedge clk); inject_beat = '0;
    #0.1;
    for (int c = 0; c < CH; c++) begin
      checks++;
      if (bad[c] != (c == 0)) begin failures++; $display("FAIL bad-command flag on channel %0d = %0b", c, bad[c]); end
    end
    for (int k = 0; k < 16; k++) begin
      int s;
      s = 0;
      for (int c = 0; c < CH; c++) begin
        s += cnt[c][k];
        checks++;
        if (cnt[c][k] == 0) begin failures++; $display("FAIL channel %0d: never happened: %s", c, NAMES[k]); end
      end
      $display("%-22s %0d", NAMES[k], s);
    end
    $display("cycles %0d", cyc);
    $display("TB_RESULT checks=%0d failures=%0d", total_checks(), total_failures());
    $finish;
  end
endmodule
