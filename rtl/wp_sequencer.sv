// wp_sequencer: next value of a set's write pointer after one write.
//
// The replacement policy keeps one log2(WAYS)-bit write pointer per set and
// moves it after every write into the set. Two implementations are given for
// it and both are built here, chosen by METHOD:
//   METHOD 1: the pointer value is the block number itself and steps through
//             the write permutation 0 -> 5 -> 2 -> 7 -> 3 -> 6 -> 1 -> 4 -> 0;
//             a straight decoder then selects that block.
//   METHOD 2: the pointer is a plain modulo-WAYS counter; the permutation is
//             put into the wiring of the decoder outputs (see way_decoder).
// Purely combinational; the register lives in wp_table. METHOD 1 is the
// default here; the source does not single one out as the main one.
module wp_sequencer
  import talrw_pkg::*;
#(
  parameter int unsigned METHOD = 1
) (
  input  ptr_t ptr,
  output ptr_t next_ptr
);

  always_comb begin
    if (METHOD == 2) next_ptr = ptr + ptr_t'(1);
    else             next_ptr = perm_next(ptr);
  end

endmodule
