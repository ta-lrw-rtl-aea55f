// wp_table: the per-set write pointers of the TA-LRW replacement policy.
//
// Holds one PTR_W-bit pointer per set (3 bits for 8 ways), which is all the
// replacement state the policy needs: the block it points at is the least
// recently written block of the set and the next one to be written. A read
// port returns the pointer of rd_set combinationally. When adv is high at a
// clock edge the pointer of adv_set is replaced by its successor from
// wp_sequencer (permutation step or counter step, per METHOD). Synchronous
// active-low reset sets every pointer to 0; the initial value is this
// design's choice.
module wp_table
  import talrw_pkg::*;
#(
  parameter int unsigned SETS   = talrw_pkg::DEF_SETS,
  parameter int unsigned METHOD = 1,
  localparam int unsigned SET_W = $clog2(SETS)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [SET_W-1:0] rd_set,
  output ptr_t             rd_ptr,
  input  logic             adv,
  input  logic [SET_W-1:0] adv_set
);

  ptr_t ptrs [SETS];
  ptr_t adv_next;

  wp_sequencer #(.METHOD(METHOD)) u_seq (
    .ptr      (ptrs[adv_set]),
    .next_ptr (adv_next)
  );

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int s = 0; s < SETS; s++) ptrs[s] <= '0;
    end else if (adv) begin
      ptrs[adv_set] <= adv_next;
    end
  end

  assign rd_ptr = ptrs[rd_set];

endmodule
