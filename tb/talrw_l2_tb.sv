// talrw_l2_tb: end-to-end test of the full-size L2 (default parameters:
// 2048 sets x 8 ways x 64 B, 10/20-cycle array, pointer method 1).
//
// A random mix of L1 reads and writebacks, concentrated on a few sets and a
// small pool of tags so that sets fill, wrap and evict, plus scattered
// accesses over all sets. The testbench keeps its own model of the policy:
// per set the tags, valid and dirty bits and a write count, with the block to
// write taken from the order B0 B5 B2 B7 B3 B6 B1 B4. From it, it predicts the
// decision of every request (read hit / read miss / writeback in place /
// writeback redirected / writeback miss / eviction), the block each write
// goes to, the address and data of each eviction, and the data each read
// returns (the latest value written by L1, or the memory's initial pattern).
// It also checks that consecutive writes of a set are at least three blocks
// apart, the read-hit latency (READ_LAT + 3 cycles) and the in-place
// writeback latency (WRITE_LAT + 3 cycles), and counts how often each
// mechanism happened: every one must occur at least once. For information it
// also prints the shares of write distances 3/4/5 (checked against 3/8, 2/8,
// 3/8) and a histogram of the LRU age of each replaced valid block, the
// measure used to judge how close write-age replacement comes to LRU. With
// this uniform random traffic the histogram says little about real programs.
module talrw_l2_tb;
  import talrw_pkg::*;

  localparam int NS = DEF_SETS;
  localparam int SW = $clog2(NS);
  localparam int TW = ADDR_W - OFFSET_W - SW;
  localparam int BW = ADDR_W - OFFSET_W;
  localparam int NREQ = 3000;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;

  logic cpu_req_valid, cpu_req_ready, cpu_resp_valid;
  req_type_e cpu_req_type, cpu_resp_type;
  logic [ADDR_W-1:0] cpu_req_addr;
  block_t cpu_req_wdata, cpu_resp_rdata;
  logic mem_req_valid, mem_req_ready, mem_req_we, mem_resp_valid;
  logic [BW-1:0] mem_req_addr;
  block_t mem_req_wdata, mem_resp_rdata;
  logic wr_evt_valid;
  logic [SW-1:0] wr_evt_set;
  ptr_t wr_evt_way;
  evt_t evt;
  int mem_stalls, mem_writes;

  talrw_l2 dut (.*);
  mem_model u_mem (.clk, .rst_n, .req_valid(mem_req_valid), .req_ready(mem_req_ready),
    .req_we(mem_req_we), .req_addr(mem_req_addr), .req_wdata(mem_req_wdata),
    .resp_valid(mem_resp_valid), .resp_rdata(mem_resp_rdata), .stalls(mem_stalls), .writes(mem_writes));

  always #5 clk = ~clk;

  // ---- reference model ----
  int            order [8] = '{0, 5, 2, 7, 3, 6, 1, 4};
  bit            m_valid [NS][8];
  bit            m_dirty [NS][8];
  int            m_tag   [NS][8];
  int            m_nwr   [NS];
  block_t        truth   [int];       // latest value of each block, by block address
  int            last_way [NS];
  // recency of every block (request number of its last read or write), used
  // only to report how old, in LRU terms, the evicted blocks were
  int            m_last  [NS][8];
  int            req_no;
  int            age_hist [8];

  function automatic block_t init_block(logic [BW-1:0] a);
    block_t b;
    for (int i = 0; i < BLOCK_BITS / 32; i++) b[i*32 +: 32] = {a[15:0], 16'(i)} ^ 32'h5A5A_0000;
    return b;
  endfunction

  function automatic block_t value_of(int ba);
    return truth.exists(ba) ? truth[ba] : init_block(BW'(ba));
  endfunction

  // ---- monitors ----
  int     wr_ways[$];
  int     wr_sets[$];
  logic [BW-1:0] mem_wr_addr[$];
  block_t mem_wr_data[$];
  logic [BW-1:0] mem_rd_addr[$];
  evt_t   evt_acc;
  always @(posedge clk) begin
    if (rst_n && wr_evt_valid) begin wr_ways.push_back(int'(wr_evt_way)); wr_sets.push_back(int'(wr_evt_set)); end
    if (rst_n && mem_req_valid && mem_req_ready) begin
      if (mem_req_we) begin mem_wr_addr.push_back(mem_req_addr); mem_wr_data.push_back(mem_req_wdata); end
      else mem_rd_addr.push_back(mem_req_addr);
    end
    evt_acc <= evt_acc | evt;
  end

  // mechanism counters
  int n_rd_hit, n_rd_miss, n_rd_miss_evict, n_wb_inplace, n_wb_redirect, n_wb_miss, n_wb_evict;
  int n_wrap, n_lat_rd, n_lat_wb, n_dist3, n_dist4, n_dist5;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  function automatic block_t rand_block();
    block_t b;
    for (int i = 0; i < BLOCK_BITS / 32; i++) b[i*32 +: 32] = $urandom;
    return b;
  endfunction

  task automatic one_request(req_type_e t, int tag, int set);
    block_t wd, rd;
    evt_t exp_ev, ev;
    int ba, hit_way, pw, lat, exp_way;
    bit hit, exp_evict;
    int ev_tag;
    ba = (tag << SW) | set;
    wd = rand_block();

    // prediction
    hit = 0; hit_way = 0;
    for (int w = 0; w < 8; w++)
      if (m_valid[set][w] && m_tag[set][w] == tag) begin hit = 1; hit_way = w; end
    pw = order[m_nwr[set] % 8];
    exp_ev = '0;
    exp_evict = 0;
    req_no++;
    if (t == REQ_READ && hit) exp_ev.rd_hit = 1;
    else begin
      if (t == REQ_READ) exp_ev.rd_miss = 1;
      else if (hit && hit_way == pw) exp_ev.wb_hit_inplace = 1;
      else if (hit) exp_ev.wb_hit_redirect = 1;
      else exp_ev.wb_miss = 1;
      if (hit && t == REQ_WRITEBACK) m_valid[set][hit_way] = 0;
      // LRU age of the block being replaced: 7 minus the number of valid
      // blocks used less recently, so the least recently used block is 7
      if (m_valid[set][pw]) begin
        int age = 7;
        for (int w = 0; w < 8; w++)
          if (w != pw && m_valid[set][w] && m_last[set][w] < m_last[set][pw]) age--;
        age_hist[age]++;
      end
      exp_evict = !exp_ev.wb_hit_inplace && m_valid[set][pw] && m_dirty[set][pw];
      exp_ev.evict = exp_evict;
    end
    ev_tag = m_tag[set][pw];

    // drive
    wr_ways.delete(); wr_sets.delete(); mem_wr_addr.delete(); mem_wr_data.delete(); mem_rd_addr.delete();
    @(negedge clk);
    cpu_req_valid = 1; cpu_req_type = t; cpu_req_addr = ADDR_W'(ba << OFFSET_W); cpu_req_wdata = wd;
    evt_acc = '0;
    do @(posedge clk); while (!cpu_req_ready);
    #1 cpu_req_valid = 0;
    lat = 0;
    do begin @(posedge clk); lat++; end while (!cpu_resp_valid && lat < 2000);
    rd = cpu_resp_rdata;
    check(cpu_resp_type == t, "response type");
    if (t == REQ_WRITEBACK) begin
      // wait for the array to finish so that all monitors have seen this request
      @(posedge clk);
    end else if (!exp_ev.rd_hit) begin
      while (!cpu_req_ready) @(posedge clk);
    end
    @(posedge clk); #1;
    ev = evt_acc;

    check(ev == exp_ev, $sformatf("req %s tag %0d set %0d: events %b expected %b",
                                  t.name(), tag, set, ev, exp_ev));
    if (t == REQ_READ) check(rd == value_of(ba), $sformatf("read data tag %0d set %0d", tag, set));

    if (exp_ev.rd_hit) begin
      check(wr_ways.size() == 0 && mem_rd_addr.size() == 0 && mem_wr_addr.size() == 0, "read hit touches nothing");
      check(lat == DEF_READ_LAT + 3, $sformatf("read hit latency %0d", lat));
      m_last[set][hit_way] = req_no;
      n_lat_rd++;
      n_rd_hit++;
    end else begin
      check(wr_ways.size() == 1 && wr_ways[0] == pw && wr_sets[0] == set,
            $sformatf("write went to block %0d, expected %0d", wr_ways.size() ? wr_ways[0] : -1, pw));
      if (exp_ev.wb_hit_inplace) begin
        check(lat == DEF_WRITE_LAT + 3, $sformatf("in-place writeback latency %0d", lat));
        n_lat_wb++;
      end
      if (exp_evict) begin
        check(mem_wr_addr.size() == 1 && mem_wr_addr[0] == BW'((ev_tag << SW) | set), "eviction address");
        check(mem_wr_data.size() == 1 && mem_wr_data[0] == value_of((ev_tag << SW) | set), "eviction data");
      end else check(mem_wr_addr.size() == 0, "no eviction");
      if (t == REQ_READ) check(mem_rd_addr.size() == 1 && mem_rd_addr[0] == BW'(ba), "fetch address");
      // write distance
      if (m_nwr[set] > 0) begin
        int d = (pw > last_way[set]) ? pw - last_way[set] : last_way[set] - pw;
        check(d >= 3, $sformatf("write distance %0d in set %0d", d, set));
        if (d == 3) n_dist3++;
        if (d == 4) n_dist4++;
        if (d == 5) n_dist5++;
      end
      last_way[set] = pw;
      // model update
      m_valid[set][pw] = 1;
      m_dirty[set][pw] = (t == REQ_WRITEBACK);
      m_tag[set][pw]   = tag;
      m_last[set][pw]  = req_no;
      m_nwr[set]++;
      if (m_nwr[set] % 8 == 0) n_wrap++;
      if (exp_ev.rd_miss)         begin n_rd_miss++; if (exp_evict) n_rd_miss_evict++; end
      if (exp_ev.wb_hit_inplace)  n_wb_inplace++;
      if (exp_ev.wb_hit_redirect) n_wb_redirect++;
      if (exp_ev.wb_miss)         n_wb_miss++;
      if (t == REQ_WRITEBACK && exp_evict) n_wb_evict++;
    end
    if (t == REQ_WRITEBACK) truth[ba] = wd;
  endtask

  task automatic seen(int n, string what);
    checks++;
    $display("  %-32s %0d", what, n);
    if (n == 0) begin failures++; $display("FAIL: mechanism never happened: %s", what); end
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int hot_sets [4] = '{0, 1, 1000, NS - 1};
    cpu_req_valid = 0; cpu_req_type = REQ_READ; cpu_req_addr = '0; cpu_req_wdata = '0;
    foreach (m_valid[s, w]) begin m_valid[s][w] = 0; m_dirty[s][w] = 0; m_tag[s][w] = 0; end
    foreach (m_nwr[s]) begin m_nwr[s] = 0; last_way[s] = 0; end
    foreach (m_last[s, w]) m_last[s][w] = 0;
    foreach (age_hist[a]) age_hist[a] = 0;
    req_no = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    @(posedge clk);
    for (int i = 0; i < NREQ; i++) begin
      req_type_e t;
      int set, tag;
      t = ($urandom_range(0, 1) == 1) ? REQ_WRITEBACK : REQ_READ;
      if ($urandom_range(0, 9) == 0) begin
        set = $urandom_range(0, NS - 1);
        tag = $urandom_range(0, (1 << TW) - 1);
      end else begin
        set = hot_sets[$urandom_range(0, 3)];
        tag = $urandom_range(0, 11);
      end
      one_request(t, tag, set);
    end
    $display("mechanisms:");
    seen(n_rd_hit,        "read hit");
    seen(n_rd_miss,       "read miss");
    seen(n_rd_miss_evict, "read miss with dirty eviction");
    seen(n_wb_inplace,    "writeback hit, WP = FB");
    seen(n_wb_redirect,   "writeback hit, WP != FB");
    seen(n_wb_miss,       "writeback miss");
    seen(n_wb_evict,      "writeback with dirty eviction");
    seen(n_wrap,          "pointer full round");
    seen(mem_stalls,      "memory back-pressure cycles");
    seen(n_dist3,         "write distance 3");
    seen(n_dist4,         "write distance 4");
    seen(n_dist5,         "write distance 5");
    seen(n_lat_rd,        "read-hit latency checked");
    seen(n_lat_wb,        "in-place write latency checked");
    // shares of write distances 3 / 4 / 5 should approach 3/8, 2/8 and 3/8
    begin
      real tot, f3, f4, f5;
      tot = real'(n_dist3 + n_dist4 + n_dist5);
      f3 = n_dist3 / tot; f4 = n_dist4 / tot; f5 = n_dist5 / tot;
      $display("  write distance shares 3/4/5: %0.3f %0.3f %0.3f", f3, f4, f5);
      check(f3 > 0.345 && f3 < 0.405, "share of distance 3 near 37.5 %");
      check(f4 > 0.22 && f4 < 0.28, "share of distance 4 near 25 %");
      check(f5 > 0.345 && f5 < 0.405, "share of distance 5 near 37.5 %");
    end
    begin
      int tot = 0;
      foreach (age_hist[a]) tot += age_hist[a];
      $display("LRU age of replaced valid blocks (7 = least recently used block of the set):");
      foreach (age_hist[a]) $display("  age %0d: %0d (%0.1f %%)", a, age_hist[a], 100.0 * age_hist[a] / tot);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
