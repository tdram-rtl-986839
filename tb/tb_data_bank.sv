// tb_data_bank: opens rows, writes and reads random columns against a
// reference array, checks the one-clock read latency and that a column
// access with the gate closed neither writes the array nor returns data.
// Runs with 4 rows.
module tb_data_bank;
  timeunit 1ns; timeprecision 100ps;
  import tdram_pkg::*;
  localparam int unsigned ROWS = 4;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic act = 0, pre = 0, rd = 0, wr = 0, gate = 0;
  logic [1:0] row = '0;
  logic [4:0] col = '0;
  logic [255:0] wd = '0, rdq;
  logic rdv, open;
  logic [255:0] refm [ROWS*COLS];

  always #1 clk = ~clk;

  data_bank #(.ROWS(ROWS)) dut (.clk(clk), .rst_n(rst_n), .act_i(act), .row_i(row), .pre_i(pre),
    .rd_i(rd), .wr_i(wr), .col_gate_i(gate), .col_i(col), .wr_data_i(wd),
    .rd_data_o(rdq), .rd_valid_o(rdv), .row_open_o(open));

  task automatic chk(input logic c, input string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", msg); end
  endtask

  function automatic logic [255:0] rnd256();
    logic [255:0] v;
    for (int i = 0; i < 8; i++) v[i*32 +: 32] = $urandom;
    return v;
  endfunction

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    // fill every line with known data
    for (int r = 0; r < ROWS; r++) begin
      @(negedge clk); act = 1; row = 2'(r);
      @(negedge clk); act = 0;
      chk(open, "row not open after ACT");
      for (int c = 0; c < COLS; c++) begin
        @(negedge clk); wr = 1; gate = 1; col = 5'(c); wd = rnd256(); refm[r*COLS+c] = wd;
      end
      @(negedge clk); wr = 0; pre = 1;
      @(negedge clk); pre = 0;
      chk(!open, "row still open after PRE");
    end
    for (int n = 0; n < 200; n++) begin
      int r, c;
      logic g, w;
      logic [255:0] prev_q;
      r = $urandom_range(ROWS-1, 0);
      c = $urandom_range(COLS-1, 0);
      g = 1'($urandom);
      w = 1'($urandom);
      @(negedge clk); act = 1; row = 2'(r);
      @(negedge clk); act = 0;
      prev_q = rdq;
      wd = rnd256(); col = 5'(c); gate = g;
      if (w) wr = 1; else rd = 1;
      @(negedge clk);
      wr = 0; rd = 0;
      if (w) begin
        if (g) refm[r*COLS+c] = wd;
        chk(!rdv, "write raised rd_valid");
      end else if (g) begin
        chk(rdv && rdq == refm[r*COLS+c], $sformatf("read r%0d c%0d wrong", r, c));
      end else begin
        chk(!rdv && rdq == prev_q, "gated read returned data");
      end
      // read back through an open gate to see the array
      gate = 1; rd = 1; col = 5'(c);
      @(negedge clk); rd = 0;
      chk(rdv && rdq == refm[r*COLS+c], $sformatf("readback r%0d c%0d wrong (w=%0b g=%0b)", r, c, w, g));
      pre = 1;
      @(negedge clk); pre = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
