// way_decoder: the 3-to-8 way-select decoder driven by the write pointer.
//
// Input: pointer bits b2..b0. Outputs: a one-hot select of blocks B7..B0 and
// the index of the selected block. With METHOD 1 decoder output k drives
// block Bk (the pointer already holds a block number). With METHOD 2 output k
// drives block WRITE_PERM[k], so a binary counter on the input walks the
// blocks in permutation order. The straight wiring follows the published
// figure; for METHOD 2 the shuffle is derived from the permutation, not
// traced from a drawing. Purely combinational. With METHOD 1, way_idx is the
// input itself; it is kept as a port so both methods share one interface.
module way_decoder
  import talrw_pkg::*;
#(
  parameter int unsigned METHOD = 1
) (
  input  ptr_t      ptr,
  output way_mask_t way_onehot,
  output ptr_t      way_idx
);

  always_comb begin
    way_idx    = (METHOD == 2) ? WRITE_PERM[ptr] : ptr;
    way_onehot = '0;
    way_onehot[way_idx] = 1'b1;
  end

endmodule
