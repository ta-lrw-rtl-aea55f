// stt_data_array_tb: checks the data array with its default 10-cycle read and
// 20-cycle write latencies: done must come exactly that many clock edges after
// the request is taken, req_ready must stay low meanwhile, and every read must
// return the last block written to that location (compared with a model).
module stt_data_array_tb;
  import talrw_pkg::*;

  localparam int NS = 16;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic req_valid, req_ready, req_we, done;
  logic [3:0] req_set;
  ptr_t req_way;
  block_t req_wdata, rdata;
  block_t model [NS*8];
  bit     written [NS*8];

  stt_data_array #(.SETS(NS)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic block_t rand_block();
    block_t b;
    for (int i = 0; i < BLOCK_BITS / 32; i++) b[i*32 +: 32] = $urandom;
    return b;
  endfunction

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    req_valid = 0; req_we = 0; req_set = 0; req_way = 0; req_wdata = '0;
    foreach (written[i]) written[i] = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    for (int i = 0; i < 600; i++) begin
      int idx, lat, exp_lat;
      @(negedge clk);
      check(req_ready, "ready when idle");
      req_valid = 1;
      req_set   = 4'($urandom_range(0, NS - 1));
      req_way   = ptr_t'($urandom_range(0, 7));
      idx       = int'(req_set) * 8 + int'(req_way);
      req_we    = (i < 40) || !written[idx] || ($urandom_range(0, 2) == 0);
      req_wdata = rand_block();
      exp_lat   = req_we ? 20 : 10;
      @(posedge clk);                         // request taken here
      #1 req_valid = 0;
      lat = 0;
      do begin
        @(posedge clk); lat++; #1;
        if (!done) check(!req_ready, "busy during access");
      end while (!done && lat < 100);
      check(lat == exp_lat, $sformatf("%s latency %0d, expected %0d", req_we ? "write" : "read", lat, exp_lat));
      if (req_we) begin
        model[idx] = req_wdata; written[idx] = 1;
      end else begin
        check(rdata == model[idx], $sformatf("read data set %0d way %0d", req_set, req_way));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
