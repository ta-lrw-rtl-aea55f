// mem_model: behavioural main memory behind the L2 (testbench only).
//
// Block-addressed, sparse storage. A request is taken when req_valid and
// req_ready are high; req_ready is dropped at random to create back-pressure.
// A write (req_we=1) is stored at once. A read returns the block LAT cycles
// later on resp_valid/resp_rdata. A block never written reads as
// init_block(address), a pattern the testbenches can recompute.
module mem_model
  import talrw_pkg::*;
#(
  parameter int unsigned BA_W = ADDR_W - OFFSET_W,
  parameter int unsigned LAT  = 30
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            req_valid,
  output logic            req_ready,
  input  logic            req_we,
  input  logic [BA_W-1:0] req_addr,
  input  block_t          req_wdata,
  output logic            resp_valid,
  output block_t          resp_rdata,
  output int              stalls,
  output int              writes
);

  block_t store [logic [BA_W-1:0]];
  int     countdown;
  block_t pending;

  function automatic block_t init_block(logic [BA_W-1:0] a);
    block_t b;
    for (int i = 0; i < BLOCK_BITS / 32; i++) b[i*32 +: 32] = {a[15:0], 16'(i)} ^ 32'h5A5A_0000;
    return b;
  endfunction

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      req_ready  <= 1'b0;
      resp_valid <= 1'b0;
      countdown  <= 0;
      stalls     <= 0;
      writes     <= 0;
    end else begin
      resp_valid <= 1'b0;
      req_ready  <= (countdown == 0) && ($urandom_range(0, 3) != 0);
      if (req_valid && !req_ready) stalls <= stalls + 1;
      if (req_valid && req_ready) begin
        req_ready <= 1'b0;
        if (req_we) begin
          store[req_addr] = req_wdata;
          writes <= writes + 1;
        end else begin
          pending   <= store.exists(req_addr) ? store[req_addr] : init_block(req_addr);
          countdown <= LAT;
        end
      end
      if (countdown == 1) begin
        resp_valid <= 1'b1;
        resp_rdata <= pending;
      end
      if (countdown != 0) countdown <= countdown - 1;
    end
  end

endmodule
