// tb_tag_compare: drives random tags and metadata into the comparator and
// checks the hit / miss-clean / miss-dirty / invalid class and the
// column-decode gate for reads and writes against the device's operation
// table. Combinational block; a watchdog ends the run if it hangs.
module tb_tag_compare;
  timeunit 1ns; timeprecision 100ps;
  import tdram_pkg::*;

  int checks = 0, failures = 0;
  logic is_wr, unc, gate;
  logic [TAG_W-1:0] rtag;
  tag_meta_t st;
  hm_result_e res;

  tag_compare dut (.is_write_i(is_wr), .req_tag_i(rtag), .stored_i(st),
                   .uncorrectable_i(unc), .result_o(res), .read_data_o(gate));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    hm_result_e exp;
    logic expg;
    for (int n = 0; n < 400; n++) begin
      is_wr = 1'($urandom);
      unc   = ($urandom_range(9, 0) == 0);
      rtag  = 14'($urandom);
      st.valid = 1'($urandom);
      st.dirty = 1'($urandom);
      st.tag   = ($urandom_range(1, 0) == 0) ? rtag : 14'($urandom);
      #1;
      if (!st.valid || unc)     exp = HM_MISS_INVALID;
      else if (st.tag == rtag)  exp = HM_HIT;
      else if (st.dirty)        exp = HM_MISS_DIRTY;
      else                      exp = HM_MISS_CLEAN;
      expg = is_wr ? (exp == HM_MISS_DIRTY) : (exp == HM_HIT || exp == HM_MISS_DIRTY);
      checks++;
      if (res !== exp || gate !== expg) begin
        failures++;
        $display("FAIL wr=%0b v=%0b d=%0b eq=%0b unc=%0b res=%0d exp=%0d gate=%0b",
                 is_wr, st.valid, st.dirty, st.tag == rtag, unc, res, exp, gate);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
