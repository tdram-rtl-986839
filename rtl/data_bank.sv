// data_bank: one HBM3 data bank, holding 32 B of a cache line per column.
//
// A bank pair uses two of these, one in an even and one in an odd bank group;
// together they hold the 64 B line. act_i opens a row (its address is
// latched in the row buffer register), rd_i/wr_i access a column of the open
// row and pre_i closes it. Column accesses pass through the column-decode
// gate: when col_gate_i is low (the tag check said the data is not needed)
// the column decoder is not fired and neither the array nor rd_data_o
// changes, as the paper describes for a clean miss. Read data appears on
// rd_data_o one clock after rd_i; rd_valid_o marks it.
//
// The array is the paper's bank (32 columns of 32 B per row); the number of
// rows is a parameter, scaled down by default. Row-buffer and timing rules
// (tRCD, tRAS, tRP) are kept by the bank pair's sequencer; the assertions
// here catch column accesses without an open row.
module data_bank
  import tdram_pkg::*;
#(
  parameter int unsigned ROWS = ROWS_DEFAULT
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          act_i,
  input  logic [$clog2(ROWS)-1:0]       row_i,
  input  logic                          pre_i,
  input  logic                          rd_i,
  input  logic                          wr_i,
  input  logic                          col_gate_i,
  input  logic [COL_W-1:0]              col_i,
  input  logic [HALF_LINE_W-1:0]        wr_data_i,
  output logic [HALF_LINE_W-1:0]        rd_data_o,
  output logic                          rd_valid_o,
  output logic                          row_open_o
);

  localparam int unsigned RW = $clog2(ROWS);

  logic [HALF_LINE_W-1:0] mem [ROWS*COLS];
  logic [RW-1:0]          open_row;
  logic                   do_rd, do_wr;

  assign do_rd = rd_i && col_gate_i && row_open_o;
  assign do_wr = wr_i && col_gate_i && row_open_o;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      row_open_o <= 1'b0;
      open_row   <= '0;
      rd_valid_o <= 1'b0;
    end else begin
      rd_valid_o <= do_rd;
      if (act_i) begin
        row_open_o <= 1'b1;
        open_row   <= row_i;
      end else if (pre_i) begin
        row_open_o <= 1'b0;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (do_wr) mem[{open_row, col_i}] <= wr_data_i;
    if (do_rd) rd_data_o <= mem[{open_row, col_i}];
  end

  always_ff @(posedge clk) begin
    if (rst_n) a_col_needs_open_row: assert (!((rd_i || wr_i)) || (row_open_o))
      else $error("a_col_needs_open_row");
  end
  always_ff @(posedge clk) begin
    if (rst_n) a_act_needs_closed_row: assert (!(act_i) || (!row_open_o))
      else $error("a_act_needs_closed_row");
  end

endmodule
