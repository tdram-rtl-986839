// tb_tdram_top_full: the device at its default size (all 32 channels, the
// default row count, default refresh time), each channel driven by its own
// controller model for a short random mix of reads, writes, probes, fills,
// flush reads and one refresh. It checks that the whole device comes out of
// its tag-initialisation sweep after ROWS*COLS clocks and then behaves clock
// for clock as predicted on every channel.
module tb_tdram_top_full;
  timeunit 1ns; timeprecision 100ps;
  import tdram_pkg::*;

  localparam int unsigned CH = NUM_CHANNELS;

  logic clk = 0, rst_n = 0;
  logic [CA_BEAT_W-1:0] ca [CH];
  logic [DQ_BEAT_W-1:0] dq_w [CH], dq_r [CH];
  logic                 dq_oe [CH], ready [CH], ovf [CH], bad [CH];
  logic [HM_BEAT_W-1:0] hm [CH];
  logic [FB_CNT_W-1:0]  fbc [CH];
  logic                 done [CH];
  int                   hchecks [CH], hfail [CH];
  int                   cnt [CH][16];
  int checks = 0, failures = 0, cyc = 0, t0 = 0;

  always #1 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  tdram_top dut (
    .clk(clk), .rst_n(rst_n), .ca_i(ca), .dq_i(dq_w), .dq_o(dq_r), .dq_oe_o(dq_oe),
    .hm_o(hm), .ready_o(ready), .fb_count_o(fbc), .fb_overflow_o(ovf), .bad_cmd_o(bad));

  for (genvar c = 0; c < CH; c++) begin : g_host
    tdram_host_model #(.ROWS(ROWS_DEFAULT), .N_REQ(60), .T_RFC(T_RFC_DEFAULT),
                       .REF_EVERY(1500), .SEED(100 + c)) host (
      .clk(clk), .rst_n(rst_n), .ca_o(ca[c]), .dq_o(dq_w[c]), .dq_i(dq_r[c]),
      .dq_oe_i(dq_oe[c]), .hm_i(hm[c]), .ready_i(ready[c]), .fb_count_i(fbc[c]),
      .fb_overflow_i(ovf[c]), .done_o(done[c]), .checks_o(hchecks[c]),
      .failures_o(hfail[c]), .cnt_o(cnt[c]));
  end

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
    repeat (ROWS_DEFAULT * COLS + 20000) @(posedge clk);
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", total_checks(), total_failures() + 1);
    $finish;
  end

  initial begin
    bit all_done;
    repeat (3) @(posedge clk);
    rst_n = 1;
    t0 = cyc;
    while (!ready[0]) @(posedge clk);
    for (int c = 0; c < CH; c++) begin
      checks++;
      if (!ready[c] || cyc - t0 != ROWS_DEFAULT * COLS) begin
        failures++; $display("FAIL channel %0d ready after %0d clocks", c, cyc - t0);
      end
    end
    do begin
      @(posedge clk);
      all_done = 1;
      for (int c = 0; c < CH; c++) if (!done[c]) all_done = 0;
    end while (!all_done);
    for (int c = 0; c < CH; c++) begin
      checks++;
      if (cnt[c][0] + cnt[c][1] + cnt[c][2] + cnt[c][3] == 0) begin
        failures++; $display("FAIL channel %0d served no reads", c);
      end
    end
    $display("cycles %0d", cyc);
    $display("TB_RESULT checks=%0d failures=%0d", total_checks(), total_failures());
    $finish;
  end
endmodule
