// tag_array: tag, valid and dirty state of the set-associative L2.
//
// Lookup (combinational): for lk_set and lk_tag it reports hit and the found
// block hit_way. Victim port (combinational): the valid, dirty and tag bits of
// way vc_way in lk_set, used to decide whether the block under the write
// pointer must be written back first. Update port: when wr_en is high at a
// clock edge, entry (wr_set, wr_way) takes wr_valid, wr_dirty and wr_tag; the
// controller uses it to fill a block, to mark it dirty and to invalidate a
// found block that the policy does not overwrite. Valid and dirty bits are
// cleared by the synchronous active-low reset. The flip-flop organisation
// and the combinational lookup are this design's choices.
module tag_array
  import talrw_pkg::*;
#(
  parameter int unsigned SETS  = talrw_pkg::DEF_SETS,
  localparam int unsigned SET_W = $clog2(SETS),
  localparam int unsigned TAG_W = ADDR_W - OFFSET_W - SET_W
) (
  input  logic             clk,
  input  logic             rst_n,
  // lookup
  input  logic [SET_W-1:0] lk_set,
  input  logic [TAG_W-1:0] lk_tag,
  output logic             hit,
  output ptr_t             hit_way,
  // victim state
  input  ptr_t             vc_way,
  output logic             vc_valid,
  output logic             vc_dirty,
  output logic [TAG_W-1:0] vc_tag,
  // update
  input  logic             wr_en,
  input  logic [SET_W-1:0] wr_set,
  input  ptr_t             wr_way,
  input  logic             wr_valid,
  input  logic             wr_dirty,
  input  logic [TAG_W-1:0] wr_tag
);

  logic [TAG_W-1:0] tags  [SETS][WAYS];
  way_mask_t        valid [SETS];
  way_mask_t        dirty [SETS];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int s = 0; s < SETS; s++) begin
        valid[s] <= '0;
        dirty[s] <= '0;
      end
    end else if (wr_en) begin
      valid[wr_set][wr_way] <= wr_valid;
      dirty[wr_set][wr_way] <= wr_dirty;
    end
  end

  always_ff @(posedge clk) begin
    if (wr_en) tags[wr_set][wr_way] <= wr_tag;
  end

  always_comb begin
    hit     = 1'b0;
    hit_way = '0;
    for (int w = 0; w < WAYS; w++) begin
      if (valid[lk_set][w] && tags[lk_set][w] == lk_tag) begin
        hit     = 1'b1;
        hit_way = ptr_t'(w);
      end
    end
  end

  assign vc_valid = valid[lk_set][vc_way];
  assign vc_dirty = dirty[lk_set][vc_way];
  assign vc_tag   = tags[lk_set][vc_way];

endmodule
