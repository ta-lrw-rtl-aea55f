// wp_sequencer_tb: checks the next-pointer logic of both pointer methods.
// METHOD 1 must follow the write order B0 B5 B2 B7 B3 B6 B1 B4 (written out
// here as a successor table), visit all eight blocks in one round and move at
// least three blocks per step. METHOD 2 must count modulo 8.
module wp_sequencer_tb;
  import talrw_pkg::*;

  int checks = 0, failures = 0;
  ptr_t p1, n1, p2, n2;

  wp_sequencer #(.METHOD(1)) dut1 (.ptr(p1), .next_ptr(n1));
  wp_sequencer #(.METHOD(2)) dut2 (.ptr(p2), .next_ptr(n2));

  // successor of block b in the write order, written out independently
  int succ [8] = '{5, 4, 7, 6, 0, 2, 1, 3};

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #1000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int seen;
    int d;
    for (int b = 0; b < 8; b++) begin
      p1 = ptr_t'(b); p2 = ptr_t'(b); #1;
      check(int'(n1) == succ[b], $sformatf("method1 next(%0d)=%0d", b, n1));
      check(int'(n2) == (b + 1) % 8, $sformatf("method2 next(%0d)=%0d", b, n2));
      d = (int'(n1) > b) ? int'(n1) - b : b - int'(n1);
      check(d >= 3, $sformatf("step %0d->%0d is %0d blocks", b, n1, d));
    end
    // one round from block 0 visits every block and comes back
    seen = 0; p1 = '0;
    for (int k = 0; k < 8; k++) begin
      #1; seen |= 1 << int'(p1); p1 = n1;
    end
    #1;
    check(seen == 8'hFF, $sformatf("round visits %02h", seen));
    check(p1 == 3'd0, "round returns to block 0");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
