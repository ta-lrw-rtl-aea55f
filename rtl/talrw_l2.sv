// talrw_l2: STT-MRAM L2 cache with Thermal-Aware Least-Recently-Written
// (TA-LRW) replacement.
//
// Writes into STT-MRAM heat the written cells, and back-to-back writes into
// the same or neighbouring blocks of a set let that heat pile up, which raises
// retention, read-disturb and write-failure rates. This cache therefore sends
// every write of a set (fills after read misses, writeback misses and
// writeback hits) to the block under the set's write pointer and advances the
// pointer through the permutation B0, B5, B2, B7, B3, B6, B1, B4, so
// consecutive writes of a set land 3 to 5 blocks apart. A writeback hit on
// another block invalidates that block instead of overwriting it. The block
// under the pointer is the least recently written one, which is the victim.
//
// Structure: talrw_ctrl (request flow) drives tag_array (tags, valid, dirty),
// stt_data_array (blocks, 10-cycle read / 20-cycle write at the defaults) and
// wp_table (3-bit pointer per set) whose pointer goes through way_decoder to
// select the block. Default geometry: 2048 sets x 8 ways x 64 B = 1 MB, 32-bit
// byte addresses. METHOD picks one of the two pointer implementations
// (1: pointer walks the permutation, straight decoder; 2: counting pointer,
// permuted decoder outputs); both select the same blocks in the same order.
//
// Ports: cpu_req_* / cpu_resp_* face the L1 caches, mem_* face main memory
// (block addresses, i.e. byte address >> 6), wr_evt_* pulse for each block
// write into the array (set and block), and evt gives one pulse per decision
// of the controller. Single clock, synchronous active-low reset.
module talrw_l2
  import talrw_pkg::*;
#(
  parameter int unsigned SETS      = talrw_pkg::DEF_SETS,
  parameter int unsigned METHOD    = 1,
  parameter int unsigned READ_LAT  = talrw_pkg::DEF_READ_LAT,
  parameter int unsigned WRITE_LAT = talrw_pkg::DEF_WRITE_LAT,
  localparam int unsigned SET_W    = $clog2(SETS),
  localparam int unsigned TAG_W    = ADDR_W - OFFSET_W - SET_W,
  localparam int unsigned BA_W     = ADDR_W - OFFSET_W
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              cpu_req_valid,
  output logic              cpu_req_ready,
  input  req_type_e         cpu_req_type,
  input  logic [ADDR_W-1:0] cpu_req_addr,
  input  block_t            cpu_req_wdata,
  output logic              cpu_resp_valid,
  output req_type_e         cpu_resp_type,
  output block_t            cpu_resp_rdata,
  output logic              mem_req_valid,
  input  logic              mem_req_ready,
  output logic              mem_req_we,
  output logic [BA_W-1:0]   mem_req_addr,
  output block_t            mem_req_wdata,
  input  logic              mem_resp_valid,
  input  block_t            mem_resp_rdata,
  output logic              wr_evt_valid,
  output logic [SET_W-1:0]  wr_evt_set,
  output ptr_t              wr_evt_way,
  output evt_t              evt
);

  logic [SET_W-1:0] tg_set;
  logic [TAG_W-1:0] tg_tag, tg_vc_tag;
  logic             tg_hit, tg_vc_valid, tg_vc_dirty;
  ptr_t             tg_hit_way, tg_vc_way, tg_wr_way;
  logic             tg_wr_en, tg_wr_valid, tg_wr_dirty;

  logic             da_req_valid, da_req_ready, da_req_we, da_done;
  logic [SET_W-1:0] da_req_set;
  ptr_t             da_req_way;
  block_t           da_req_wdata, da_rdata;

  logic [SET_W-1:0] wp_rd_set;
  ptr_t             wp_ptr, wp_way;
  way_mask_t        wp_onehot;
  logic             wp_adv;

  talrw_ctrl #(.SETS(SETS)) u_ctrl (
    .clk, .rst_n,
    .cpu_req_valid, .cpu_req_ready, .cpu_req_type, .cpu_req_addr, .cpu_req_wdata,
    .cpu_resp_valid, .cpu_resp_type, .cpu_resp_rdata,
    .mem_req_valid, .mem_req_ready, .mem_req_we, .mem_req_addr, .mem_req_wdata,
    .mem_resp_valid, .mem_resp_rdata,
    .tg_set, .tg_tag, .tg_hit, .tg_hit_way, .tg_vc_way, .tg_vc_valid, .tg_vc_dirty,
    .tg_vc_tag, .tg_wr_en, .tg_wr_way, .tg_wr_valid, .tg_wr_dirty,
    .da_req_valid, .da_req_ready, .da_req_we, .da_req_set, .da_req_way, .da_req_wdata,
    .da_done, .da_rdata,
    .wp_rd_set, .wp_way, .wp_adv,
    .evt
  );

  tag_array #(.SETS(SETS)) u_tags (
    .clk, .rst_n,
    .lk_set   (tg_set),
    .lk_tag   (tg_tag),
    .hit      (tg_hit),
    .hit_way  (tg_hit_way),
    .vc_way   (tg_vc_way),
    .vc_valid (tg_vc_valid),
    .vc_dirty (tg_vc_dirty),
    .vc_tag   (tg_vc_tag),
    .wr_en    (tg_wr_en),
    .wr_set   (tg_set),
    .wr_way   (tg_wr_way),
    .wr_valid (tg_wr_valid),
    .wr_dirty (tg_wr_dirty),
    .wr_tag   (tg_tag)
  );

  stt_data_array #(.SETS(SETS), .READ_LAT(READ_LAT), .WRITE_LAT(WRITE_LAT)) u_data (
    .clk, .rst_n,
    .req_valid (da_req_valid),
    .req_ready (da_req_ready),
    .req_we    (da_req_we),
    .req_set   (da_req_set),
    .req_way   (da_req_way),
    .req_wdata (da_req_wdata),
    .done      (da_done),
    .rdata     (da_rdata)
  );

  wp_table #(.SETS(SETS), .METHOD(METHOD)) u_wp (
    .clk, .rst_n,
    .rd_set  (wp_rd_set),
    .rd_ptr  (wp_ptr),
    .adv     (wp_adv),
    .adv_set (wp_rd_set)
  );

  way_decoder #(.METHOD(METHOD)) u_dec (
    .ptr        (wp_ptr),
    .way_onehot (wp_onehot),
    .way_idx    (wp_way)
  );

  // Exactly one block is selected by the pointer.
  a_onehot: assert property (@(posedge clk) disable iff (!rst_n) $onehot(wp_onehot));

  assign wr_evt_valid = da_req_valid && da_req_ready && da_req_we;
  assign wr_evt_set   = da_req_set;
  assign wr_evt_way   = da_req_way;

endmodule
