// tb_ca_decoder: sends random two-beat command packets with random idle gaps
// and checks that each is decoded exactly one clock after its first beat
// with every field intact, and that unknown opcodes are dropped and flagged.
module tb_ca_decoder;
  timeunit 1ns; timeprecision 100ps;
  import tdram_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic [31:0] ca = '0;
  logic v, bad;
  tdram_cmd_t cmd;

  always #1 clk = ~clk;

  ca_decoder dut (.clk(clk), .rst_n(rst_n), .ca_i(ca), .cmd_valid_o(v), .cmd_o(cmd), .bad_cmd_o(bad));

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
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 300; n++) begin
      logic [2:0] op;
      logic [63:0] p;
      int gap;
      op = 3'($urandom_range(7, 1));
      p = {op, 29'($urandom), 32'($urandom)};
      gap = $urandom_range(3, 0);
      repeat (gap) begin
        @(negedge clk); ca = '0;
        chk(!v && !bad, "spurious command in idle");
      end
      @(negedge clk); ca = p[63:32];
      chk(!v, "valid on first beat");
      @(negedge clk); ca = p[31:0];
      #0.1;
      if (op <= 3'd5) begin
        chk(v && !bad && cmd.op == cmd_op_e'(op) && cmd.dirty == p[60] && cmd.bank == p[59:57] &&
            cmd.row == p[56:40] && cmd.col == p[39:35] && cmd.tag == p[34:21] && cmd.count == p[20:16],
            $sformatf("decode of %h wrong", p));
      end else begin
        chk(!v && bad, "unknown opcode not flagged");
      end
    end
    @(negedge clk); ca = '0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
