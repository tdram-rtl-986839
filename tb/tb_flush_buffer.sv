// tb_flush_buffer: pushes random evicted lines, takes single and grouped
// reservations, pops in reserved order and checks FIFO order, the count and
// availability bookkeeping, the grant limits, the full flag and the sticky
// overflow flag on a push into a full buffer, against a queue model.
module tb_flush_buffer;
  timeunit 1ns; timeprecision 100ps;
  import tdram_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic push = 0, pop = 0, rsv1 = 0;
  fb_entry_t pe, head;
  logic [4:0] rsvn_req = '0, rsvn_grant;
  logic g1, full, ovf;
  logic [4:0] count, avail;
  fb_entry_t q [$];
  int reserved = 0;

  always #1 clk = ~clk;

  flush_buffer dut (.clk(clk), .rst_n(rst_n), .push_i(push), .push_entry_i(pe), .pop_i(pop),
    .head_o(head), .rsv1_i(rsv1), .rsv1_grant_o(g1), .rsvn_req_i(rsvn_req), .rsvn_grant_o(rsvn_grant),
    .count_o(count), .avail_o(avail), .full_o(full), .overflow_o(ovf));

  task automatic chk(input logic c, input string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", msg); end
  endtask

  function automatic fb_entry_t rnd_entry();
    fb_entry_t e;
    e.bank = 3'($urandom); e.row = 17'($urandom); e.col = 5'($urandom); e.tag = 14'($urandom);
    for (int i = 0; i < 16; i++) e.data[i*32 +: 32] = $urandom;
    return e;
  endfunction

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    pe = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 2000; n++) begin
      int exp_g1, exp_gn, free;
      @(negedge clk);
      chk(count == 5'(q.size()) && avail == 5'(q.size() - reserved) && full == (q.size() == FB_DEPTH),
          $sformatf("count %0d avail %0d full %0b vs model %0d/%0d", count, avail, full, q.size(), q.size()-reserved));
      if (reserved > 0) chk(head == q[0], "head differs from model");
      push = (q.size() < FB_DEPTH) ? ($urandom_range(2, 0) == 0) : 1'b0;
      pe   = rnd_entry();
      pop  = (reserved > 0) && ($urandom_range(1, 0) == 0);
      rsv1 = ($urandom_range(3, 0) == 0);
      rsvn_req = ($urandom_range(7, 0) == 0) ? 5'($urandom_range(20, 0)) : 5'd0;
      #0.1;
      free   = q.size() - reserved;
      exp_g1 = (rsv1 && free > 0) ? 1 : 0;
      exp_gn = (int'(rsvn_req) > free - exp_g1) ? free - exp_g1 : int'(rsvn_req);
      chk(g1 == 1'(exp_g1) && int'(rsvn_grant) == exp_gn,
          $sformatf("grant %0b/%0d expected %0d/%0d", g1, rsvn_grant, exp_g1, exp_gn));
      @(posedge clk);
      if (pop) begin void'(q.pop_front()); reserved--; end
      if (push) q.push_back(pe);
      reserved += exp_g1 + exp_gn;
    end
    // fill up and overflow
    @(negedge clk); pop = 0; rsv1 = 0; rsvn_req = 0; push = 1;
    while (!full) begin pe = rnd_entry(); @(negedge clk); end
    chk(!ovf, "overflow before full");
    pe = rnd_entry();
    @(negedge clk); push = 0;
    chk(ovf && count == 5'(FB_DEPTH), "push into full buffer not flagged as overflow");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
