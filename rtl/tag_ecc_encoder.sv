// tag_ecc_encoder: check-bit generator for one tag-mat entry.
//
// Each cache line owns a 3-byte entry in the tag mats: a 14-bit tag, a valid
// bit and a dirty bit (16 payload bits), protected by ECC that is generated
// and checked on the DRAM die. The paper gives only that the tag entry has
// ECC, corrected on the die as in HBM3; the code is this design's choice: an
// extended Hamming (22,16) SECDED code. Payload bit i sits at Hamming position
// data_pos(i) (the positions 3..21 that are not powers of two); check bit k
// is the XOR of the payload bits whose position has bit k set, and check bit 5
// is the parity of the whole 21-bit codeword. The two spare bits of the 24-bit
// entry are written as zero.
//
// Entry layout: rsvd[23:22] ecc[21:16] {dirty, valid, tag}[15:0].
// Purely combinational.
module tag_ecc_encoder
  import tdram_pkg::*;
(
  input  tag_meta_t                meta_i,
  output logic [TAG_ENTRY_W-1:0]   entry_o
);

  // Hamming position (1-based) of payload bit i.
  function automatic int unsigned data_pos(input int unsigned i);
    int unsigned pos = 0;
    int unsigned n   = 0;
    for (int unsigned p = 1; p <= 21; p++) begin
      if ((p & (p - 1)) != 0) begin
        if (n == i) pos = p;
        n++;
      end
    end
    return pos;
  endfunction

  logic [15:0]          d;
  logic [TAG_ECC_W-1:0] ecc;

  always_comb begin
    d   = meta_i;
    ecc = '0;
    for (int unsigned i = 0; i < 16; i++) begin
      for (int unsigned k = 0; k < 5; k++) begin
        if (((data_pos(i) >> k) & 1) == 1) ecc[k] = ecc[k] ^ d[i];
      end
    end
    ecc[5] = ^{d, ecc[4:0]};
    entry_o = {2'b00, ecc, d};
  end

endmodule
