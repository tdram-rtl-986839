// ca_decoder: command decoder of one TDRAM channel.
//
// TDRAM merges HBM3's separate row and column buses into one 8-bit CA bus
// per channel. Every command, including the combined ActRd/ActWr that carry
// row, column, bank and tag together, is a 64-bit packet sent in two CA
// beats of 32 bits (8 pins x 4 unit intervals per 2 GHz clock), upper half
// first. A beat whose opcode field is not NOP starts a packet; the next beat
// completes it and cmd_valid_o is high for one clock with the decoded fields
// (this is cycle 0 of the command's timing). Unknown opcodes are dropped and
// counted on bad_cmd_o.
//
// Packet layout (this design's choice; the paper only lists the fields):
// op[63:61] dirty[60] bank[59:57] row[56:40] col[39:35] tag[34:21]
// count[20:16] reserved[15:0].
module ca_decoder
  import tdram_pkg::*;
(
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic [CA_BEAT_W-1:0]  ca_i,
  output logic                  cmd_valid_o,
  output tdram_cmd_t            cmd_o,
  output logic                  bad_cmd_o
);

  logic                 have_first;
  logic [CA_BEAT_W-1:0] first_q;
  logic [63:0]          pkt;

  assign pkt = {first_q, ca_i};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      have_first <= 1'b0;
      first_q    <= '0;
    end else if (have_first) begin
      have_first <= 1'b0;
    end else if (ca_i[31:29] != 3'(CMD_NOP)) begin
      have_first <= 1'b1;
      first_q    <= ca_i;
    end
  end

  always_comb begin
    cmd_o.op    = cmd_op_e'(pkt[63:61]);
    cmd_o.dirty = pkt[60];
    cmd_o.bank  = pkt[59:57];
    cmd_o.row   = pkt[56:40];
    cmd_o.col   = pkt[39:35];
    cmd_o.tag   = pkt[34:21];
    cmd_o.count = pkt[20:16];
    cmd_valid_o = 1'b0;
    bad_cmd_o   = 1'b0;
    if (have_first) begin
      if (pkt[63:61] <= 3'(CMD_REF)) cmd_valid_o = 1'b1;
      else                           bad_cmd_o   = 1'b1;
    end
  end

endmodule
