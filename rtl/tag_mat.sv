// tag_mat: the low-latency tag mats of one even bank-group bank.
//
// Holds one 24-bit tag entry (tag, valid, dirty and ECC) for every cache line
// of the bank pair, addressed by {row, column} exactly like the data mats, so
// that one decoded address serves tag and data. Reads are synchronous: the
// entry addressed in the cycle rd_en_i is high appears on rd_entry_o in the
// next cycle. The short access times of the mats (tRCD_TAG, tRC_TAG) are
// enforced by the bank pair's sequencer, not here.
//
// After reset the mats sweep every entry to zero, which decodes as a clean,
// invalid line with correct ECC, one entry per clock; ready_o rises when the
// sweep is done and no access may be made before. The paper does not say how
// tag state is initialised; the sweep is this design's choice. Storage
// follows the paper (one entry per line, 3 B per entry); the row count is a
// parameter, scaled down by default.
module tag_mat
  import tdram_pkg::*;
#(
  parameter int unsigned ROWS = ROWS_DEFAULT
) (
  input  logic                              clk,
  input  logic                              rst_n,
  input  logic                              rd_en_i,
  input  logic [$clog2(ROWS*COLS)-1:0]      rd_addr_i,
  output logic [TAG_ENTRY_W-1:0]            rd_entry_o,
  input  logic                              wr_en_i,
  input  logic [$clog2(ROWS*COLS)-1:0]      wr_addr_i,
  input  logic [TAG_ENTRY_W-1:0]            wr_entry_i,
  output logic                              ready_o
);

  localparam int unsigned DEPTH = ROWS * COLS;
  localparam int unsigned AW    = $clog2(DEPTH);

  logic [TAG_ENTRY_W-1:0] mem [DEPTH];
  logic [AW-1:0]          init_addr;
  logic                   init_busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      init_addr <= '0;
      init_busy <= 1'b1;
    end else if (init_busy) begin
      init_addr <= init_addr + 1'b1;
      if (32'(init_addr) == DEPTH - 1) init_busy <= 1'b0;
    end
  end

  always_ff @(posedge clk) begin
    if (init_busy)    mem[init_addr] <= '0;
    else if (wr_en_i) mem[wr_addr_i] <= wr_entry_i;
    if (rd_en_i)      rd_entry_o <= mem[rd_addr_i];
  end

  assign ready_o = !init_busy;

  always_ff @(posedge clk) begin
    if (rst_n) a_no_access_during_init: assert (!(init_busy) || (!(rd_en_i || wr_en_i)))
      else $error("a_no_access_during_init");
  end

endmodule
