// tb_tag_ecc_encoder: checks the tag-entry check bits against a reference
// built from an explicit table of Hamming positions (3,5,6,7,9..15,17..21),
// for the all-zero entry, every single payload bit and 300 random payloads.
// Combinational block; a watchdog ends the run if it hangs.
module tb_tag_ecc_encoder;
  timeunit 1ns; timeprecision 100ps;
  import tdram_pkg::*;

  int checks = 0, failures = 0;
  tag_meta_t meta;
  logic [TAG_ENTRY_W-1:0] entry;

  tag_ecc_encoder dut (.meta_i(meta), .entry_o(entry));

  localparam int POS [16] = '{3,5,6,7,9,10,11,12,13,14,15,17,18,19,20,21};

  function automatic logic [23:0] ref_entry(input logic [15:0] d);
    logic [5:0] e = '0;
    for (int i = 0; i < 16; i++)
      for (int k = 0; k < 5; k++)
        if (POS[i][k]) e[k] ^= d[i];
    e[5] = ^{d, e[4:0]};
    return {2'b00, e, d};
  endfunction

  task automatic check(input logic [15:0] d);
    meta = d;
    #1;
    checks++;
    if (entry !== ref_entry(d)) begin
      failures++;
      $display("FAIL d=%h entry=%h exp=%h", d, entry, ref_entry(d));
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    check(16'h0000);
    for (int i = 0; i < 16; i++) check(16'(1) << i);
    for (int n = 0; n < 300; n++) check(16'($urandom));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
