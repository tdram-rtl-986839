// tag_compare: the tag comparator placed in the IOSA area of the tag mats.
//
// Compares the tag carried by an ActRd, ActWr or probe command with the
// corrected tag entry of the addressed line and classifies the access the
// way the device's operation table does: a valid entry with an equal tag is a
// hit; a valid entry with another tag is a miss, dirty or clean according to
// its dirty bit; an entry that is not valid is a miss to an invalid line. An
// entry that the ECC check could not correct is treated as invalid.
//
// read_data_o is the column-decode gate sent over the internal hit/miss bus
// to the data banks: for reads the column is read on a hit or a dirty miss,
// for writes the old column is read only on a dirty miss (to move it to the
// flush buffer).
//
// The single equality comparison of a direct-mapped cache follows the paper;
// treating an uncorrectable entry as invalid is this design's choice.
// Purely combinational.
module tag_compare
  import tdram_pkg::*;
(
  input  logic             is_write_i,
  input  logic [TAG_W-1:0] req_tag_i,
  input  tag_meta_t        stored_i,
  input  logic             uncorrectable_i,
  output hm_result_e       result_o,
  output logic             read_data_o
);

  always_comb begin
    if (!stored_i.valid || uncorrectable_i) result_o = HM_MISS_INVALID;
    else if (stored_i.tag == req_tag_i)     result_o = HM_HIT;
    else if (stored_i.dirty)                result_o = HM_MISS_DIRTY;
    else                                    result_o = HM_MISS_CLEAN;

    if (is_write_i) read_data_o = (result_o == HM_MISS_DIRTY);
    else            read_data_o = (result_o == HM_HIT) || (result_o == HM_MISS_DIRTY);
  end

endmodule
