// tdram_top: the TDRAM device, 32 independent cache channels.
//
// TDRAM is an HBM3-style DRAM stack built to be a cache. Every channel keeps
// the tags and metadata of its lines in small, fast tag mats beside the data
// mats, compares tags on the die and reports hit, miss and dirty status on a
// dedicated HM bus, so data moves on DQ only when the controller needs it.
// Channels share nothing but clock and reset, so the top is an array of
// tdram_channel instances with per-channel port arrays.
//
// Per channel and per 2 GHz clock: ca_i one 32-bit CA beat (8 pins x 4 UI),
// dq_i / dq_o one 128-bit DQ beat (32 pins x 4 UI) with dq_oe_o marking
// driven beats, hm_o one 16-bit HM beat (4 pins x 4 UI). The pin-level
// serialisers, clocks, strobes, data ECC and redundancy signals are outside
// this RTL. ready_o, fb_count_o, fb_overflow_o and bad_cmd_o are status
// outputs of this design. The channel count follows the paper; the row count
// per bank is scaled down by default (ROWS).
//
// Lint note: rst_n is an asynchronous reset for every flip-flop; its only
// synchronous use is to switch the immediate assertions off during reset,
// which is why lint reports it as used both ways.
module tdram_top
  import tdram_pkg::*;
#(
  parameter int unsigned CHANNELS = NUM_CHANNELS,
  parameter int unsigned ROWS     = ROWS_DEFAULT,
  parameter int unsigned T_RFC    = T_RFC_DEFAULT
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [CA_BEAT_W-1:0] ca_i          [CHANNELS],
  input  logic [DQ_BEAT_W-1:0] dq_i          [CHANNELS],
  output logic [DQ_BEAT_W-1:0] dq_o          [CHANNELS],
  output logic                 dq_oe_o       [CHANNELS],
  output logic [HM_BEAT_W-1:0] hm_o          [CHANNELS],
  output logic                 ready_o       [CHANNELS],
  output logic [FB_CNT_W-1:0]  fb_count_o    [CHANNELS],
  output logic                 fb_overflow_o [CHANNELS],
  output logic                 bad_cmd_o     [CHANNELS]
);

  for (genvar c = 0; c < CHANNELS; c++) begin : g_ch
    tdram_channel #(.ROWS(ROWS), .T_RFC(T_RFC)) u_ch (
      .clk(clk), .rst_n(rst_n),
      .ca_i(ca_i[c]), .dq_i(dq_i[c]), .dq_o(dq_o[c]), .dq_oe_o(dq_oe_o[c]),
      .hm_o(hm_o[c]), .ready_o(ready_o[c]),
      .fb_count_o(fb_count_o[c]), .fb_overflow_o(fb_overflow_o[c]),
      .bad_cmd_o(bad_cmd_o[c])
    );
  end

endmodule
