// way_decoder_tb: checks the straight decoder (METHOD 1) and the decoder with
// outputs wired in write order (METHOD 2). A 3-bit counter on the METHOD 2
// decoder must select B0 B5 B2 B7 B3 B6 B1 B4 in turn; every output must be
// one-hot and agree with the binary index.
module way_decoder_tb;
  import talrw_pkg::*;

  int checks = 0, failures = 0;
  ptr_t p;
  way_mask_t oh1, oh2;
  ptr_t ix1, ix2;

  way_decoder #(.METHOD(1)) dut1 (.ptr(p), .way_onehot(oh1), .way_idx(ix1));
  way_decoder #(.METHOD(2)) dut2 (.ptr(p), .way_onehot(oh2), .way_idx(ix2));

  int order [8] = '{0, 5, 2, 7, 3, 6, 1, 4};

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
    for (int k = 0; k < 8; k++) begin
      p = ptr_t'(k); #1;
      check(oh1 == way_mask_t'(1 << k), $sformatf("method1 onehot(%0d)=%b", k, oh1));
      check(int'(ix1) == k, $sformatf("method1 idx(%0d)=%0d", k, ix1));
      check(oh2 == way_mask_t'(1 << order[k]), $sformatf("method2 onehot(%0d)=%b", k, oh2));
      check(int'(ix2) == order[k], $sformatf("method2 idx(%0d)=%0d", k, ix2));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
