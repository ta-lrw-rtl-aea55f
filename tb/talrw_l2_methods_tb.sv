// talrw_l2_methods_tb: the two write-pointer implementations must be
// indistinguishable from outside. Two 16-set caches, one with the pointer
// walking the write order (METHOD 1) and one with a counting pointer and a
// permuted decoder (METHOD 2), receive the same random reads and writebacks
// and share one memory model's timing; every output, including the block
// written on each array write, is compared on every cycle.
module talrw_l2_methods_tb;
  import talrw_pkg::*;

  localparam int NS = 16;
  localparam int SW = $clog2(NS);
  localparam int BW = ADDR_W - OFFSET_W;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;

  logic cpu_req_valid;
  req_type_e cpu_req_type;
  logic [ADDR_W-1:0] cpu_req_addr;
  block_t cpu_req_wdata;

  logic      rdy [2], rv [2], mv [2], mwe [2], wv [2];
  req_type_e rt [2];
  block_t    rdat [2], mwd [2];
  logic [BW-1:0] ma [2];
  logic [SW-1:0] ws [2];
  ptr_t      ww [2];
  evt_t      ev [2];

  logic mem_req_ready, mem_resp_valid;
  block_t mem_resp_rdata;
  int mem_stalls, mem_writes;

  talrw_l2 #(.SETS(NS), .METHOD(1)) dut1 (.clk, .rst_n, .cpu_req_valid, .cpu_req_ready(rdy[0]),
    .cpu_req_type, .cpu_req_addr, .cpu_req_wdata, .cpu_resp_valid(rv[0]), .cpu_resp_type(rt[0]),
    .cpu_resp_rdata(rdat[0]), .mem_req_valid(mv[0]), .mem_req_ready, .mem_req_we(mwe[0]),
    .mem_req_addr(ma[0]), .mem_req_wdata(mwd[0]), .mem_resp_valid, .mem_resp_rdata,
    .wr_evt_valid(wv[0]), .wr_evt_set(ws[0]), .wr_evt_way(ww[0]), .evt(ev[0]));
  talrw_l2 #(.SETS(NS), .METHOD(2)) dut2 (.clk, .rst_n, .cpu_req_valid, .cpu_req_ready(rdy[1]),
    .cpu_req_type, .cpu_req_addr, .cpu_req_wdata, .cpu_resp_valid(rv[1]), .cpu_resp_type(rt[1]),
    .cpu_resp_rdata(rdat[1]), .mem_req_valid(mv[1]), .mem_req_ready, .mem_req_we(mwe[1]),
    .mem_req_addr(ma[1]), .mem_req_wdata(mwd[1]), .mem_resp_valid, .mem_resp_rdata,
    .wr_evt_valid(wv[1]), .wr_evt_set(ws[1]), .wr_evt_way(ww[1]), .evt(ev[1]));
  mem_model u_mem (.clk, .rst_n, .req_valid(mv[0]), .req_ready(mem_req_ready), .req_we(mwe[0]),
    .req_addr(ma[0]), .req_wdata(mwd[0]), .resp_valid(mem_resp_valid), .resp_rdata(mem_resp_rdata),
    .stalls(mem_stalls), .writes(mem_writes));

  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL @%0t: %s", $time, what);
    end
  endtask

  int n_writes = 0, n_resp = 0;
  always @(negedge clk) if (rst_n) begin
    check(rdy[0] == rdy[1], "cpu_req_ready");
    check(rv[0] == rv[1], "cpu_resp_valid");
    if (rv[0]) begin
      n_resp++;
      check(rt[0] == rt[1] && rdat[0] == rdat[1], "response");
    end
    check(mv[0] == mv[1], "mem_req_valid");
    if (mv[0]) check(mwe[0] == mwe[1] && ma[0] == ma[1] && (!mwe[0] || mwd[0] == mwd[1]), "memory request");
    check(wv[0] == wv[1], "array write strobe");
    if (wv[0]) begin
      n_writes++;
      check(ws[0] == ws[1] && ww[0] == ww[1], $sformatf("block written %0d vs %0d", ww[0], ww[1]));
    end
    check(ev[0] == ev[1], "decision events");
  end

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    cpu_req_valid = 0; cpu_req_type = REQ_READ; cpu_req_addr = '0; cpu_req_wdata = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    for (int i = 0; i < 2000; i++) begin
      @(negedge clk);
      cpu_req_valid = 1;
      cpu_req_type  = ($urandom_range(0, 1) == 1) ? REQ_WRITEBACK : REQ_READ;
      cpu_req_addr  = ADDR_W'((($urandom_range(0, 11) << SW) | $urandom_range(0, 3)) << OFFSET_W);
      for (int w = 0; w < BLOCK_BITS / 32; w++) cpu_req_wdata[w*32 +: 32] = $urandom;
      do @(posedge clk); while (!rdy[0]);
      #1 cpu_req_valid = 0;
      do @(posedge clk); while (!rdy[0]);
    end
    checks++;
    if (n_writes < 1000 || n_resp != 2000) begin
      failures++;
      $display("FAIL: only %0d array writes / %0d responses", n_writes, n_resp);
    end
    $display("compared %0d array writes and %0d responses", n_writes, n_resp);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
