// tb_tag_ecc_decoder: encodes random payloads with a reference SECDED
// encoder, flips zero, one or two of the 22 code bits and checks the
// corrected payload and the corrected / uncorrectable flags. Combinational
// block; a watchdog ends the run if it hangs.
module tb_tag_ecc_decoder;
  timeunit 1ns; timeprecision 100ps;
  import tdram_pkg::*;

  int checks = 0, failures = 0;
  logic [TAG_ENTRY_W-1:0] entry;
  tag_meta_t meta;
  logic corr, unc;

  tag_ecc_decoder dut (.entry_i(entry), .meta_o(meta), .corrected_o(corr), .uncorrectable_o(unc));

  localparam int POS [16] = '{3,5,6,7,9,10,11,12,13,14,15,17,18,19,20,21};

  function automatic logic [23:0] ref_entry(input logic [15:0] d);
    logic [5:0] e = '0;
    for (int i = 0; i < 16; i++)
      for (int k = 0; k < 5; k++)
        if (POS[i][k]) e[k] ^= d[i];
    e[5] = ^{d, e[4:0]};
    return {2'b00, e, d};
  endfunction

  task automatic run(input logic [15:0] d, input int nflip);
    logic [23:0] e;
    int a, b;
    e = ref_entry(d);
    a = $urandom_range(21, 0);
    do b = $urandom_range(21, 0); while (b == a);
    if (nflip >= 1) e[a] = ~e[a];
    if (nflip >= 2) e[b] = ~e[b];
    entry = e;
    #1;
    checks++;
    case (nflip)
      0: if (meta !== d || corr || unc) begin failures++; $display("FAIL clean d=%h", d); end
      1: if (meta !== d || !corr || unc) begin failures++; $display("FAIL single d=%h bit %0d got %h", d, a, meta); end
      default: if (!unc || corr) begin failures++; $display("FAIL double d=%h bits %0d %0d", d, a, b); end
    endcase
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 300; n++) run(16'($urandom), n % 3);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
