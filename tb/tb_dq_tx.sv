// tb_dq_tx: checks the three read-side DQ sources: bank read beats pass
// straight to the pins, a flush slot sends the four beats of the flush
// head and pops it on the last beat, and a grouped flush read sends the
// granted number of lines back to back exactly DELAY clocks after the
// command. A small flush-buffer model supplies the head.
module tb_dq_tx;
  timeunit 1ns; timeprecision 100ps;
  import tdram_pkg::*;
  localparam int NB = 8;
  localparam int DELAY = OFS_DQ_FB;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic [NB-1:0] rdv = '0, slot = '0;
  logic [127:0] rdb [NB];
  logic gs = 0;
  logic [4:0] gc = '0;
  logic [511:0] fbq [$];
  logic [511:0] head;
  logic pop, oe;
  logic [127:0] dq;
  int pops = 0;

  always #1 clk = ~clk;
  assign head = (fbq.size() > 0) ? fbq[0] : '0;

  dq_tx #(.NB(NB)) dut (.clk(clk), .rst_n(rst_n), .rd_valid_i(rdv), .rd_beat_i(rdb), .fb_slot_i(slot),
    .grp_start_i(gs), .grp_count_i(gc), .fb_head_i(head), .fb_pop_o(pop), .dq_o(dq), .dq_oe_o(oe));

  always @(posedge clk) if (pop) begin void'(fbq.pop_front()); pops++; end

  task automatic chk(input logic c, input string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", msg); end
  endtask

  function automatic logic [511:0] rnd_line();
    logic [511:0] v;
    for (int i = 0; i < 16; i++) v[i*32 +: 32] = $urandom;
    return v;
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < NB; i++) rdb[i] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // bank reads
    for (int n = 0; n < 40; n++) begin
      int b;
      logic [127:0] v;
      b = $urandom_range(NB-1, 0);
      v = {$urandom, $urandom, $urandom, $urandom};
      @(negedge clk); rdv = '0; rdv[b] = 1; rdb[b] = v;
      #0.1 chk(oe && dq == v, "bank beat not passed to DQ");
    end
    @(negedge clk); rdv = '0;
    #0.1 chk(!oe, "DQ driven when idle");
    // flush slots
    for (int n = 0; n < 10; n++) begin
      logic [511:0] l0, l1;
      int p0;
      l0 = rnd_line(); l1 = rnd_line();
      fbq.push_back(l0); fbq.push_back(l1);
      p0 = pops;
      @(negedge clk); slot = 8'(1) << $urandom_range(NB-1, 0);
      for (int k = 0; k < 4; k++) begin
        #0.1 chk(oe && dq == l0[k*128 +: 128], $sformatf("flush slot beat %0d wrong", k));
        @(negedge clk); slot = '0;
      end
      chk(pops == p0 + 1 && fbq[0] == l1, "flush head not popped after its last beat");
      void'(fbq.pop_front());
    end
    // grouped flush reads
    for (int n = 0; n < 6; n++) begin
      int k;
      logic [511:0] lines [4];
      k = $urandom_range(4, 1);
      for (int i = 0; i < k; i++) begin lines[i] = rnd_line(); fbq.push_back(lines[i]); end
      @(negedge clk); gs = 1; gc = 5'(k);
      @(negedge clk); gs = 0; gc = 0;
      for (int d = 1; d < DELAY; d++) begin
        #0.1 chk(!oe, "DQ driven before tRL");
        @(negedge clk);
      end
      for (int i = 0; i < k; i++)
        for (int bt = 0; bt < 4; bt++) begin
          #0.1 chk(oe && dq == lines[i][bt*128 +: 128], $sformatf("group line %0d beat %0d wrong", i, bt));
          @(negedge clk);
        end
      #0.1 chk(!oe && fbq.size() == 0, "group did not stop after its lines");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
