// tag_ecc_decoder: on-die check and correction of one tag-mat entry.
//
// Recomputes the five Hamming check bits of the extended (22,16) code written
// by tag_ecc_encoder and the overall parity of the stored codeword. A zero
// syndrome with even parity is a clean entry. Odd parity marks a single-bit
// error: a syndrome naming a payload position flips that payload bit, any
// other syndrome points at a check bit and the payload is used as stored.
// Even parity with a non-zero syndrome is a double error: the payload cannot
// be trusted and uncorrectable_o is raised (the bank pair then treats the
// line as invalid).
//
// The paper states only that tag ECC is checked and corrected on the die;
// the code itself is this design's choice. Purely combinational.
module tag_ecc_decoder
  import tdram_pkg::*;
(
  input  logic [TAG_ENTRY_W-1:0] entry_i,
  output tag_meta_t              meta_o,
  output logic                   corrected_o,     // a single-bit error was fixed
  output logic                   uncorrectable_o  // double error detected
);

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
  logic [4:0]           syn;
  logic                 par;
  logic [15:0]          fixed;

  always_comb begin
    d     = entry_i[15:0];
    ecc   = entry_i[21:16];
    syn   = ecc[4:0];
    for (int unsigned i = 0; i < 16; i++) begin
      for (int unsigned k = 0; k < 5; k++) begin
        if (((data_pos(i) >> k) & 1) == 1) syn[k] = syn[k] ^ d[i];
      end
    end
    par   = ^{d, ecc};
    fixed = d;
    corrected_o     = 1'b0;
    uncorrectable_o = 1'b0;
    if (par) begin
      corrected_o = 1'b1;
      for (int unsigned i = 0; i < 16; i++) begin
        if (32'(syn) == data_pos(i)) fixed[i] = ~d[i];
      end
    end else if (syn != '0) begin
      uncorrectable_o = 1'b1;
    end
    meta_o = fixed;
  end

endmodule
