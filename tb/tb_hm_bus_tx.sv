// tb_hm_bus_tx: feeds random tag-check results at random spacing (at least
// two clocks) and checks that each appears on the HM pins exactly DELAY
// clocks later as a two-beat packet with the expected fields, and that the
// bus is zero otherwise.
module tb_hm_bus_tx;
  timeunit 1ns; timeprecision 100ps;
  import tdram_pkg::*;
  localparam int DELAY = OFS_HM_BUS - (OFS_TAG_RD + 1);

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic rv = 0, fb = 0;
  tag_result_t r;
  logic [15:0] hm;
  logic [15:0] exp_bus [int];
  int cyc = 0;

  always #1 clk = ~clk;

  hm_bus_tx dut (.clk(clk), .rst_n(rst_n), .res_valid_i(rv), .res_i(r), .fb_data_i(fb), .hm_o(hm));

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) cyc <= cyc + 1;

  always @(negedge clk) if (rst_n) begin
    logic [15:0] e;
    e = exp_bus.exists(cyc) ? exp_bus[cyc] : 16'h0;
    checks++;
    if (hm !== e) begin failures++; $display("FAIL cycle %0d hm=%h exp=%h", cyc, hm, e); end
  end

  initial begin
    r = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 300; n++) begin
      @(negedge clk);
      rv = 0;
      if ($urandom_range(2, 0) == 0) begin
        logic [31:0] p;
        rv = 1; fb = 1'($urandom);
        r.kind = hm_kind_e'($urandom_range(2, 0)); r.result = hm_result_e'($urandom_range(3, 0));
        r.ecc_err = 1'($urandom); r.bank = 3'($urandom); r.tag = 14'($urandom);
        p = {1'b1, r.kind, r.result, fb, r.ecc_err, r.bank, r.tag, 8'h00};
        exp_bus[cyc + DELAY]     = p[31:16];
        exp_bus[cyc + DELAY + 1] = p[15:0];
        @(negedge clk); rv = 0;
      end
    end
    repeat (DELAY + 4) @(negedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
