// tag_array_tb: random updates and lookups on a 16-set tag array, compared
// with a model kept in the testbench: hit and found way, and the valid, dirty
// and tag bits of a chosen way. Covers reset (all invalid), fills,
// dirty marking and invalidation of a single way.
module tag_array_tb;
  import talrw_pkg::*;

  localparam int NS = 16;
  localparam int TW = ADDR_W - OFFSET_W - 4;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic [3:0] lk_set, wr_set;
  logic [TW-1:0] lk_tag, vc_tag, wr_tag;
  logic hit, vc_valid, vc_dirty, wr_en, wr_valid, wr_dirty;
  ptr_t hit_way, vc_way, wr_way;

  tag_array #(.SETS(NS)) dut (.*);

  bit            m_valid [NS][8];
  bit            m_dirty [NS][8];
  logic [TW-1:0] m_tag   [NS][8];

  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int hits = 0;
    wr_en = 0; wr_set = 0; wr_way = 0; wr_valid = 0; wr_dirty = 0; wr_tag = 0;
    lk_set = 0; lk_tag = 0; vc_way = 0;
    foreach (m_valid[s, w]) begin m_valid[s][w] = 0; m_dirty[s][w] = 0; m_tag[s][w] = 0; end
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    for (int i = 0; i < 3000; i++) begin
      bit exp_hit; int exp_way;
      @(negedge clk);
      // lookup with a tag from a small pool so that hits are common
      lk_set = 4'($urandom_range(0, NS - 1));
      lk_tag = TW'($urandom_range(0, 11));
      vc_way = ptr_t'($urandom_range(0, 7));
      #1;
      exp_hit = 0; exp_way = 0;
      for (int w = 0; w < 8; w++)
        if (m_valid[lk_set][w] && m_tag[lk_set][w] == lk_tag) begin exp_hit = 1; exp_way = w; end
      check(hit == exp_hit, $sformatf("hit set %0d tag %0d", lk_set, lk_tag));
      if (exp_hit) begin
        hits++;
        check(int'(hit_way) == exp_way, $sformatf("hit_way %0d exp %0d", hit_way, exp_way));
      end
      check(vc_valid == m_valid[lk_set][vc_way], "vc_valid");
      if (m_valid[lk_set][vc_way]) begin
        check(vc_dirty == m_dirty[lk_set][vc_way], "vc_dirty");
        check(vc_tag == m_tag[lk_set][vc_way], "vc_tag");
      end
      // random update; never create two valid copies of one tag in a set
      wr_en    = ($urandom_range(0, 1) == 1);
      wr_set   = 4'($urandom_range(0, NS - 1));
      wr_way   = ptr_t'($urandom_range(0, 7));
      wr_tag   = TW'($urandom_range(0, 11));
      wr_valid = ($urandom_range(0, 4) != 0);
      wr_dirty = ($urandom_range(0, 1) == 1);
      for (int w = 0; w < 8; w++)
        if (w != int'(wr_way) && m_valid[wr_set][w] && m_tag[wr_set][w] == wr_tag) wr_valid = 0;
      @(posedge clk); #1;
      if (wr_en) begin
        m_valid[wr_set][wr_way] = wr_valid;
        m_dirty[wr_set][wr_way] = wr_dirty;
        m_tag[wr_set][wr_way]   = wr_tag;
      end
      wr_en = 0;
    end
    check(hits > 100, $sformatf("only %0d hits exercised", hits));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
