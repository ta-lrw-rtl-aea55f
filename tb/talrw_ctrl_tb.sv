// talrw_ctrl_tb: directed walk through every branch of the TA-LRW request
// flow, with the controller wired to the tag array, data array, pointer table
// and the counting-pointer / permuted-decoder implementation (METHOD 2) in a
// 4-set cache with short array latencies.
//   1. eight writeback misses into set 1 fill blocks 0 5 2 7 3 6 1 4 in order;
//   2. a writeback hit on the block under the pointer is written in place;
//   3. a writeback hit elsewhere invalidates the found block, evicts the dirty
//      block under the pointer to memory and writes the pointed block;
//   4. a read miss evicts the next pointed block, fetches and fills it;
//   5. read hits return the latest data and leave the pointer alone.
// Expected ways, addresses, data and events are written out by hand here.
module talrw_ctrl_tb;
  import talrw_pkg::*;

  localparam int NS = 4;
  localparam int SW = 2;
  localparam int TW = ADDR_W - OFFSET_W - SW;
  localparam int BW = ADDR_W - OFFSET_W;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;

  logic cpu_req_valid, cpu_req_ready, cpu_resp_valid;
  req_type_e cpu_req_type, cpu_resp_type;
  logic [ADDR_W-1:0] cpu_req_addr;
  block_t cpu_req_wdata, cpu_resp_rdata;
  logic mem_req_valid, mem_req_ready, mem_req_we, mem_resp_valid;
  logic [BW-1:0] mem_req_addr;
  block_t mem_req_wdata, mem_resp_rdata;
  logic [SW-1:0] tg_set, wp_rd_set, da_req_set;
  logic [TW-1:0] tg_tag, tg_vc_tag;
  logic tg_hit, tg_vc_valid, tg_vc_dirty, tg_wr_en, tg_wr_valid, tg_wr_dirty;
  ptr_t tg_hit_way, tg_vc_way, tg_wr_way, da_req_way, wp_way, wp_ptr;
  logic da_req_valid, da_req_ready, da_req_we, da_done, wp_adv;
  block_t da_req_wdata, da_rdata;
  way_mask_t wp_onehot;
  evt_t evt;
  int mem_stalls, mem_writes;

  talrw_ctrl #(.SETS(NS)) dut (.*);
  tag_array #(.SETS(NS)) u_tags (.clk, .rst_n, .lk_set(tg_set), .lk_tag(tg_tag), .hit(tg_hit),
    .hit_way(tg_hit_way), .vc_way(tg_vc_way), .vc_valid(tg_vc_valid), .vc_dirty(tg_vc_dirty),
    .vc_tag(tg_vc_tag), .wr_en(tg_wr_en), .wr_set(tg_set), .wr_way(tg_wr_way),
    .wr_valid(tg_wr_valid), .wr_dirty(tg_wr_dirty), .wr_tag(tg_tag));
  stt_data_array #(.SETS(NS), .READ_LAT(2), .WRITE_LAT(3)) u_data (.clk, .rst_n,
    .req_valid(da_req_valid), .req_ready(da_req_ready), .req_we(da_req_we), .req_set(da_req_set),
    .req_way(da_req_way), .req_wdata(da_req_wdata), .done(da_done), .rdata(da_rdata));
  wp_table #(.SETS(NS), .METHOD(2)) u_wp (.clk, .rst_n, .rd_set(wp_rd_set), .rd_ptr(wp_ptr),
    .adv(wp_adv), .adv_set(wp_rd_set));
  way_decoder #(.METHOD(2)) u_dec (.ptr(wp_ptr), .way_onehot(wp_onehot), .way_idx(wp_way));
  mem_model #(.LAT(5)) u_mem (.clk, .rst_n, .req_valid(mem_req_valid), .req_ready(mem_req_ready),
    .req_we(mem_req_we), .req_addr(mem_req_addr), .req_wdata(mem_req_wdata),
    .resp_valid(mem_resp_valid), .resp_rdata(mem_resp_rdata), .stalls(mem_stalls), .writes(mem_writes));

  always #5 clk = ~clk;

  // Monitors: ways written, memory writes and events of the current request.
  int     wr_ways[$];
  logic [BW-1:0] mem_wr_addr[$];
  block_t mem_wr_data[$];
  evt_t   evt_acc;
  always @(posedge clk) begin
    if (rst_n && da_req_valid && da_req_ready && da_req_we) wr_ways.push_back(int'(da_req_way));
    if (rst_n && mem_req_valid && mem_req_ready && mem_req_we) begin
      mem_wr_addr.push_back(mem_req_addr);
      mem_wr_data.push_back(mem_req_wdata);
    end
    evt_acc <= evt_acc | evt;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic block_t pat(int k);
    block_t b;
    for (int i = 0; i < BLOCK_BITS / 32; i++) b[i*32 +: 32] = 32'(k * 1000 + i);
    return b;
  endfunction

  function automatic logic [ADDR_W-1:0] addr(int tag, int set);
    return ADDR_W'((tag << (SW + OFFSET_W)) | (set << OFFSET_W));
  endfunction

  // Issue one request and wait for its response.
  task automatic access(req_type_e t, int tag, int set, block_t wd, output block_t rd, output evt_t ev);
    @(negedge clk);
    cpu_req_valid = 1; cpu_req_type = t; cpu_req_addr = addr(tag, set); cpu_req_wdata = wd;
    evt_acc = '0;
    do @(posedge clk); while (!cpu_req_ready);
    #1 cpu_req_valid = 0;
    do @(posedge clk); while (!cpu_resp_valid);
    rd = cpu_resp_rdata;
    check(cpu_resp_type == t, "response type");
    @(posedge clk); #1;
    ev = evt_acc;
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    block_t rd;
    evt_t ev;
    static int order [8] = '{0, 5, 2, 7, 3, 6, 1, 4};
    cpu_req_valid = 0; cpu_req_type = REQ_READ; cpu_req_addr = '0; cpu_req_wdata = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;

    // 1. writeback misses fill set 1 in write order
    for (int k = 0; k < 8; k++) begin
      access(REQ_WRITEBACK, k, 1, pat(k), rd, ev);
      check(ev.wb_miss && !ev.evict, $sformatf("wb miss %0d events %b", k, ev));
    end
    check(wr_ways.size() == 8, "eight writes");
    for (int k = 0; k < 8; k++)
      check(wr_ways[k] == order[k], $sformatf("write %0d went to block %0d", k, wr_ways[k]));
    wr_ways.delete();

    // 2. pointer is back at block 0, which holds tag 0: overwrite in place
    access(REQ_WRITEBACK, 0, 1, pat(100), rd, ev);
    check(ev.wb_hit_inplace && !ev.evict, $sformatf("in-place events %b", ev));
    check(wr_ways.size() == 1 && wr_ways[0] == 0, "in-place write to block 0");
    wr_ways.delete();

    // 3. tag 0 again: pointer now at block 5 (tag 1, dirty) -> invalidate block 0,
    //    write tag 1 back to memory, write tag 0 into block 5
    access(REQ_WRITEBACK, 0, 1, pat(101), rd, ev);
    check(ev.wb_hit_redirect && ev.evict, $sformatf("redirect events %b", ev));
    check(wr_ways.size() == 1 && wr_ways[0] == 5, "redirected write to block 5");
    check(mem_wr_addr.size() == 1 && mem_wr_addr[0] == BW'((1 << SW) | 1), "eviction address of tag 1");
    check(mem_wr_data.size() == 1 && mem_wr_data[0] == pat(1), "eviction data of tag 1");
    wr_ways.delete(); mem_wr_addr.delete(); mem_wr_data.delete();

    // 4. read tag 1: miss; pointer at block 2 (tag 2, dirty) is evicted, tag 1 fetched into block 2
    access(REQ_READ, 1, 1, '0, rd, ev);
    check(ev.rd_miss && ev.evict, $sformatf("read miss events %b", ev));
    check(rd == pat(1), "read miss returns the block written back earlier");
    check(wr_ways.size() == 1 && wr_ways[0] == 2, "fill into block 2");
    check(mem_wr_addr.size() == 1 && mem_wr_addr[0] == BW'((2 << SW) | 1), "eviction address of tag 2");
    check(mem_wr_data.size() == 1 && mem_wr_data[0] == pat(2), "eviction data of tag 2");
    wr_ways.delete(); mem_wr_addr.delete(); mem_wr_data.delete();

    // 5. read hits: tag 0 (in block 5), tag 3, tag 1 (now clean in block 2); no writes
    access(REQ_READ, 0, 1, '0, rd, ev);
    check(ev.rd_hit && rd == pat(101), "read hit tag 0 returns latest writeback");
    access(REQ_READ, 3, 1, '0, rd, ev);
    check(ev.rd_hit && rd == pat(3), "read hit tag 3");
    access(REQ_READ, 1, 1, '0, rd, ev);
    check(ev.rd_hit && rd == pat(1), "read hit tag 1");
    check(wr_ways.size() == 0, "reads do not write");
    // 6. next write still goes to block 7 (reads did not move the pointer);
    //    tag 2 is not present -> writeback miss, tag 3 in block 7 (dirty) evicted
    access(REQ_WRITEBACK, 2, 1, pat(102), rd, ev);
    check(ev.wb_miss && ev.evict, $sformatf("wb miss events %b", ev));
    check(wr_ways.size() == 1 && wr_ways[0] == 7, "write after reads goes to block 7");
    check(mem_wr_addr.size() == 1 && mem_wr_addr[0] == BW'((3 << SW) | 1), "eviction address of tag 3");
    check(mem_wr_data.size() == 1 && mem_wr_data[0] == pat(3), "eviction data of tag 3");
    // 8. four more writeback misses fill blocks 3 6 1 4; the pointer is then back
    //    at block 0, which step 3 invalidated: writing it must evict nothing
    mem_wr_addr.delete(); mem_wr_data.delete(); wr_ways.delete();
    for (int k = 0; k < 4; k++) begin
      access(REQ_WRITEBACK, 20 + k, 1, pat(20 + k), rd, ev);
      check(ev.wb_miss, $sformatf("wb miss tag %0d events %b", 20 + k, ev));
    end
    mem_wr_addr.delete(); mem_wr_data.delete(); wr_ways.delete();
    access(REQ_WRITEBACK, 30, 1, pat(30), rd, ev);
    check(ev.wb_miss && !ev.evict, $sformatf("write into invalidated block 0: events %b", ev));
    check(wr_ways.size() == 1 && wr_ways[0] == 0, "write after a full round goes to block 0");
    check(mem_wr_addr.size() == 0, "invalidated block is not written back");
    access(REQ_READ, 0, 1, '0, rd, ev);
    check(ev.rd_hit && rd == pat(101), "tag 0 still read from block 5");
    // 7. another set is independent: its first write goes to block 0
    wr_ways.delete();
    access(REQ_READ, 9, 2, '0, rd, ev);
    check(ev.rd_miss && !ev.evict && wr_ways.size() == 1 && wr_ways[0] == 0, "set 2 starts at block 0");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
