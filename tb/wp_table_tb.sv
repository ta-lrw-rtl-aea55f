// wp_table_tb: drives random pointer advances into a 16-set table and checks
// every set's pointer against a model that counts writes per set and looks
// the block up in the write order B0 B5 B2 B7 B3 B6 B1 B4. Also checks reset
// to block 0 and that a cycle without adv changes nothing.
module wp_table_tb;
  import talrw_pkg::*;

  localparam int NS = 16;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic [3:0] rd_set, adv_set;
  logic adv;
  ptr_t rd_ptr;
  int nwrites [NS];
  int order [8] = '{0, 5, 2, 7, 3, 6, 1, 4};

  wp_table #(.SETS(NS), .METHOD(1)) dut (.clk, .rst_n, .rd_set, .rd_ptr, .adv, .adv_set);

  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic check_all();
    for (int s = 0; s < NS; s++) begin
      rd_set = 4'(s); #1;
      check(int'(rd_ptr) == order[nwrites[s] % 8],
            $sformatf("set %0d after %0d writes: ptr=%0d", s, nwrites[s], rd_ptr));
    end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    adv = 0; adv_set = 0; rd_set = 0;
    foreach (nwrites[s]) nwrites[s] = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    check_all();
    for (int i = 0; i < 400; i++) begin
      @(negedge clk);
      adv     = ($urandom_range(0, 3) != 0);
      adv_set = 4'($urandom_range(0, NS - 1));
      if (i < 40) adv_set = 4'd3;           // long run on one set: several full rounds
      @(posedge clk); #1;
      if (adv) nwrites[adv_set]++;
      adv = 0;
      if (i % 25 == 0) check_all();
    end
    check_all();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
