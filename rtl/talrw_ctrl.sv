// talrw_ctrl: L2 cache controller with the TA-LRW write policy.
//
// Every block that enters the data array is written into the block the set's
// write pointer selects, and the pointer moves on after each such write, so
// two consecutive writes into a set are always at least three blocks apart.
// Requests come from L1 and are handled one at a time:
//   read, hit        -> read the found block, return it.
//   read, miss       -> fetch the block from memory, return it, and write it
//                       into the pointed block.
//   writeback, hit   -> if the found block is the pointed block, overwrite it;
//                       otherwise invalidate the found block and write the
//                       data into the pointed block.
//   writeback, miss  -> write the data into the pointed block.
// Reads never move the pointer. Before the pointed block is overwritten, a
// valid dirty block there is read from the array and sent to memory.
// This decision tree follows the published flowchart; the dirty-victim
// writeback, the one-request-at-a-time sequencing (the reference L2 is
// non-blocking, but its miss handling is not described) and the response
// timing are this design's choices.
//
// Interfaces. L1 side: cpu_req_* valid/ready; one cpu_resp_valid pulse per
// request (read data, or an acknowledge for a writeback, sent once its array
// write has finished; a read miss is answered when its fill write is issued).
// Memory side: mem_req_* valid/ready, we=1 posts a block write, we=0 asks for
// a block that arrives later on mem_resp_valid. Array side: the ports of
// tag_array, stt_data_array and the write-pointer table (wp_way is the block
// the pointer of wp_rd_set selects).
//
// Timing with the default 10/20-cycle array: read hit 1 (accept) + 1 (lookup)
// + 1 (issue) + 10 cycles to the response; a write keeps the controller busy
// for the 20 array cycles plus the same overhead.
module talrw_ctrl
  import talrw_pkg::*;
#(
  parameter int unsigned SETS  = talrw_pkg::DEF_SETS,
  localparam int unsigned SET_W = $clog2(SETS),
  localparam int unsigned TAG_W = ADDR_W - OFFSET_W - SET_W,
  localparam int unsigned BA_W  = ADDR_W - OFFSET_W
) (
  input  logic              clk,
  input  logic              rst_n,
  // L1 side
  input  logic              cpu_req_valid,
  output logic              cpu_req_ready,
  input  req_type_e         cpu_req_type,
  input  logic [ADDR_W-1:0] cpu_req_addr,
  input  block_t            cpu_req_wdata,
  output logic              cpu_resp_valid,
  output req_type_e         cpu_resp_type,
  output block_t            cpu_resp_rdata,
  // memory side
  output logic              mem_req_valid,
  input  logic              mem_req_ready,
  output logic              mem_req_we,
  output logic [BA_W-1:0]   mem_req_addr,
  output block_t            mem_req_wdata,
  input  logic              mem_resp_valid,
  input  block_t            mem_resp_rdata,
  // tag array
  output logic [SET_W-1:0]  tg_set,
  output logic [TAG_W-1:0]  tg_tag,
  input  logic              tg_hit,
  input  ptr_t              tg_hit_way,
  output ptr_t              tg_vc_way,
  input  logic              tg_vc_valid,
  input  logic              tg_vc_dirty,
  input  logic [TAG_W-1:0]  tg_vc_tag,
  output logic              tg_wr_en,
  output ptr_t              tg_wr_way,
  output logic              tg_wr_valid,
  output logic              tg_wr_dirty,
  // data array
  output logic              da_req_valid,
  input  logic              da_req_ready,
  output logic              da_req_we,
  output logic [SET_W-1:0]  da_req_set,
  output ptr_t              da_req_way,
  output block_t            da_req_wdata,
  input  logic              da_done,
  input  block_t            da_rdata,
  // write pointer
  output logic [SET_W-1:0]  wp_rd_set,
  input  ptr_t              wp_way,
  output logic              wp_adv,
  // monitoring
  output evt_t              evt
);

  typedef enum logic [3:0] {
    S_IDLE, S_LOOKUP, S_RD_ISSUE, S_RD_WAIT,
    S_EV_ISSUE, S_EV_WAIT, S_EV_MEM,
    S_FETCH_REQ, S_FETCH_WAIT, S_WRITE, S_WRITE_WAIT
  } state_e;

  state_e           state;
  req_type_e        r_type;
  logic [SET_W-1:0] r_set;
  logic [TAG_W-1:0] r_tag;
  block_t           r_data;       // block to be written (writeback data or fetched block)
  ptr_t             r_way;        // found block for a read hit, pointed block otherwise
  logic [TAG_W-1:0] r_vc_tag;     // tag of the dirty block being evicted

  // Address split of the registered request.
  assign tg_set    = r_set;
  assign tg_tag    = r_tag;
  assign wp_rd_set = r_set;
  assign tg_vc_way = wp_way;

  assign cpu_req_ready = (state == S_IDLE);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state <= S_IDLE;
    end else begin
      unique case (state)
        S_IDLE: if (cpu_req_valid) state <= S_LOOKUP;
        S_LOOKUP: begin
          if (r_type == REQ_READ && tg_hit) state <= S_RD_ISSUE;
          else if (r_type == REQ_WRITEBACK && tg_hit && tg_hit_way == wp_way) state <= S_WRITE;
          else if (tg_vc_valid && tg_vc_dirty) state <= S_EV_ISSUE;
          else if (r_type == REQ_READ) state <= S_FETCH_REQ;
          else state <= S_WRITE;
        end
        S_RD_ISSUE:   if (da_req_ready) state <= S_RD_WAIT;
        S_RD_WAIT:    if (da_done) state <= S_IDLE;
        S_EV_ISSUE:   if (da_req_ready) state <= S_EV_WAIT;
        S_EV_WAIT:    if (da_done) state <= S_EV_MEM;
        S_EV_MEM:     if (mem_req_ready) state <= (r_type == REQ_READ) ? S_FETCH_REQ : S_WRITE;
        S_FETCH_REQ:  if (mem_req_ready) state <= S_FETCH_WAIT;
        S_FETCH_WAIT: if (mem_resp_valid) state <= S_WRITE;
        S_WRITE:      if (da_req_ready) state <= S_WRITE_WAIT;
        S_WRITE_WAIT: if (da_done) state <= S_IDLE;
        default:      state <= S_IDLE;
      endcase
    end
  end

  // Request registers.
  always_ff @(posedge clk) begin
    if (state == S_IDLE && cpu_req_valid) begin
      r_type <= cpu_req_type;
      r_set  <= cpu_req_addr[OFFSET_W +: SET_W];
      r_tag  <= cpu_req_addr[ADDR_W-1 -: TAG_W];
      r_data <= cpu_req_wdata;
    end
    if (state == S_LOOKUP) begin
      r_way    <= (r_type == REQ_READ && tg_hit) ? tg_hit_way : wp_way;
      r_vc_tag <= tg_vc_tag;
    end
    if (state == S_FETCH_WAIT && mem_resp_valid) r_data <= mem_resp_rdata;
  end

  // Evicted block, held from the array read until memory takes it.
  block_t ev_data;
  always_ff @(posedge clk) begin
    if (state == S_EV_WAIT && da_done) ev_data <= da_rdata;
  end

  always_comb begin
    // tag array update
    tg_wr_en    = 1'b0;
    tg_wr_way   = r_way;
    tg_wr_valid = 1'b1;
    tg_wr_dirty = (r_type == REQ_WRITEBACK);
    // data array
    da_req_valid = 1'b0;
    da_req_we    = 1'b0;
    da_req_set   = r_set;
    da_req_way   = r_way;
    da_req_wdata = r_data;
    // memory
    mem_req_valid = 1'b0;
    mem_req_we    = 1'b0;
    mem_req_addr  = {r_tag, r_set};
    mem_req_wdata = ev_data;
    // pointer
    wp_adv = 1'b0;
    // L1 response
    cpu_resp_valid = 1'b0;
    cpu_resp_type  = r_type;
    cpu_resp_rdata = r_data;
    evt = '0;

    unique case (state)
      S_LOOKUP: begin
        evt.rd_hit          = (r_type == REQ_READ) && tg_hit;
        evt.rd_miss         = (r_type == REQ_READ) && !tg_hit;
        evt.wb_hit_inplace  = (r_type == REQ_WRITEBACK) && tg_hit && (tg_hit_way == wp_way);
        evt.wb_hit_redirect = (r_type == REQ_WRITEBACK) && tg_hit && (tg_hit_way != wp_way);
        evt.wb_miss         = (r_type == REQ_WRITEBACK) && !tg_hit;
        // Found block not under the pointer: invalidate it now.
        if (evt.wb_hit_redirect) begin
          tg_wr_en    = 1'b1;
          tg_wr_way   = tg_hit_way;
          tg_wr_valid = 1'b0;
          tg_wr_dirty = 1'b0;
        end
      end
      S_RD_ISSUE: da_req_valid = 1'b1;
      S_RD_WAIT: begin
        cpu_resp_valid = da_done;
        cpu_resp_rdata = da_rdata;
      end
      S_EV_ISSUE: da_req_valid = 1'b1;
      S_EV_MEM: begin
        mem_req_valid = 1'b1;
        mem_req_we    = 1'b1;
        mem_req_addr  = {r_vc_tag, r_set};
        evt.evict     = mem_req_ready;
      end
      S_FETCH_REQ: mem_req_valid = 1'b1;
      S_WRITE: begin
        da_req_valid = 1'b1;
        da_req_we    = 1'b1;
        if (da_req_ready) begin
          tg_wr_en       = 1'b1;
          wp_adv         = 1'b1;
          cpu_resp_valid = (r_type == REQ_READ);
        end
      end
      S_WRITE_WAIT: cpu_resp_valid = da_done && (r_type == REQ_WRITEBACK);
      default: ;
    endcase
  end

  // Every block written into the array goes to the block under the pointer.
  a_write_to_pointer: assert property (@(posedge clk) disable iff (!rst_n)
    (da_req_valid && da_req_we) |-> (da_req_way == wp_way));
  // A read hit reads the found block and nothing moves the pointer on a read hit.
  a_no_adv_on_read_hit: assert property (@(posedge clk) disable iff (!rst_n)
    (state == S_RD_ISSUE || state == S_RD_WAIT) |-> !wp_adv);

endmodule
