// hm_bus_tx: driver of the 4-bit unidirectional hit-miss (HM) bus.
//
// A bank pair produces its tag-check result 16 clocks after a command. This
// block turns it into a 32-bit HM packet (start bit, command kind, result,
// flush-data flag, uncorrectable-ECC flag, bank, stored tag) and puts the
// packet on the pins tRCD_TAG + tHM = 30 clocks after the command, as two HM
// beats of 16 bits (4 pins x 4 unit intervals), upper half first. The bus
// idles at zero; a packet is recognised by its start bit. The tag field is
// the tag stored in the line, so a dirty miss delivers the dirty tag the
// controller needs to write the line back.
//
// The fixed tHM latency and the contents (hit/miss, status, dirty tag)
// follow the paper; the packet layout and the two-beat length are this
// design's choices. Results are at least two clocks apart (a command takes
// two CA beats), so packets never overlap; an assertion checks this.
module hm_bus_tx
  import tdram_pkg::*;
#(
  parameter int unsigned DELAY = OFS_HM_BUS - (OFS_TAG_RD + 1)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  res_valid_i,
  input  tag_result_t           res_i,
  input  logic                  fb_data_i,
  output logic [HM_BEAT_W-1:0]  hm_o
);

  logic [DELAY-1:0] vpipe;
  hm_packet_t       ppipe [DELAY];
  hm_packet_t       pkt_in;
  logic             second;
  logic [HM_BEAT_W-1:0] low_q;

  always_comb begin
    pkt_in.start   = 1'b1;
    pkt_in.kind    = res_i.kind;
    pkt_in.result  = res_i.result;
    pkt_in.fb_data = fb_data_i;
    pkt_in.ecc_err = res_i.ecc_err;
    pkt_in.bank    = res_i.bank;
    pkt_in.tag     = res_i.tag;
    pkt_in.rsvd    = '0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vpipe  <= '0;
      second <= 1'b0;
      low_q  <= '0;
      for (int i = 0; i < DELAY; i++) ppipe[i] <= '0;
    end else begin
      vpipe    <= {vpipe[DELAY-2:0], res_valid_i};
      ppipe[0] <= pkt_in;
      for (int i = 1; i < DELAY; i++) ppipe[i] <= ppipe[i-1];
      second <= vpipe[DELAY-1];
      low_q  <= ppipe[DELAY-1][15:0];
    end
  end

  always_comb begin
    if (vpipe[DELAY-1])  hm_o = ppipe[DELAY-1][31:16];
    else if (second)     hm_o = low_q;
    else                 hm_o = '0;
  end

  always_ff @(posedge clk) begin
    if (rst_n) a_no_overlap: assert (!(vpipe[DELAY-1]) || (!second))
      else $error("a_no_overlap");
  end

endmodule
