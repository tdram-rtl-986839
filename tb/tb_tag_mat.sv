// tb_tag_mat: checks the power-up sweep (ready after exactly ROWS*COLS
// clocks, every entry then reads as zero), the one-clock read latency and
// random writes against a reference array. Runs with 8 rows.
module tb_tag_mat;
  timeunit 1ns; timeprecision 100ps;
  import tdram_pkg::*;
  localparam int unsigned ROWS = 8;
  localparam int unsigned D = ROWS * COLS;
  localparam int unsigned AW = $clog2(D);

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic rd_en = 0, wr_en = 0, ready;
  logic [AW-1:0] rd_addr = '0, wr_addr = '0;
  logic [23:0] rd_entry, wr_entry = '0;
  logic [23:0] refm [D];

  always #1 clk = ~clk;

  tag_mat #(.ROWS(ROWS)) dut (.clk(clk), .rst_n(rst_n), .rd_en_i(rd_en), .rd_addr_i(rd_addr),
    .rd_entry_o(rd_entry), .wr_en_i(wr_en), .wr_addr_i(wr_addr), .wr_entry_i(wr_entry), .ready_o(ready));

  task automatic chk(input logic c, input string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", msg); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cyc = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    while (!ready) begin @(posedge clk); cyc++; end
    chk(cyc == D, $sformatf("init took %0d clocks, expected %0d", cyc, D));
    for (int i = 0; i < D; i++) refm[i] = '0;
    // sweep-read all entries
    for (int i = 0; i < D; i++) begin
      @(negedge clk); rd_en = 1; rd_addr = AW'(i);
      @(negedge clk); rd_en = 0;
      chk(rd_entry == 24'h0, $sformatf("entry %0d not cleared: %h", i, rd_entry));
    end
    // random writes and reads
    for (int n = 0; n < 500; n++) begin
      @(negedge clk);
      wr_en = 1'($urandom); wr_addr = AW'($urandom_range(D-1, 0)); wr_entry = 24'($urandom);
      rd_en = 1; rd_addr = AW'($urandom_range(D-1, 0));
      begin
        logic [23:0] exp;
        exp = refm[rd_addr];
        if (wr_en) refm[wr_addr] = wr_entry;
        @(negedge clk);
        wr_en = 0; rd_en = 0;
        chk(rd_entry == exp, $sformatf("read %0d got %h exp %h", rd_addr, rd_entry, exp));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
