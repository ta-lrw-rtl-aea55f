// stt_data_array: the data blocks of the STT-MRAM L2 with their access times.
//
// SETS x WAYS blocks of BLOCK_BITS bits. One access at a time: a request is
// taken when req_valid and req_ready are both high; req_ready then stays low
// until the access ends. A read ends READ_LAT cycles after it was taken, with
// done high for one cycle and rdata holding the block. A write ends WRITE_LAT
// cycles after it was taken (the block is updated on that last cycle), again
// with a one-cycle done. With a 1 GHz clock the defaults give the 10 ns read
// and 20 ns write of the reference STT-MRAM L2. The cells are modelled as
// ideal storage: write failures, read disturbance and retention failures are
// not modelled, and the single-port, unbanked organisation is this design's
// choice.
module stt_data_array
  import talrw_pkg::*;
#(
  parameter int unsigned SETS      = talrw_pkg::DEF_SETS,
  parameter int unsigned READ_LAT  = talrw_pkg::DEF_READ_LAT,
  parameter int unsigned WRITE_LAT = talrw_pkg::DEF_WRITE_LAT,
  localparam int unsigned SET_W    = $clog2(SETS),
  localparam int unsigned CNT_W    = $clog2(((READ_LAT > WRITE_LAT) ? READ_LAT : WRITE_LAT) + 1)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             req_valid,
  output logic             req_ready,
  input  logic             req_we,
  input  logic [SET_W-1:0] req_set,
  input  ptr_t             req_way,
  input  block_t           req_wdata,
  output logic             done,
  output block_t           rdata
);

  block_t mem [SETS*WAYS];

  logic                        busy;
  logic                        op_we;
  logic [SET_W+PTR_W-1:0]      op_idx;
  block_t                      op_wdata;
  logic [CNT_W-1:0]            cnt;
  logic                        last;

  assign req_ready = !busy;
  assign last      = busy && (cnt == CNT_W'(1));

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      busy <= 1'b0;
      cnt  <= '0;
      done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (!busy && req_valid) begin
        busy     <= 1'b1;
        op_we    <= req_we;
        op_idx   <= {req_set, req_way};
        op_wdata <= req_wdata;
        cnt      <= req_we ? CNT_W'(WRITE_LAT) : CNT_W'(READ_LAT);
      end else if (busy) begin
        cnt <= cnt - CNT_W'(1);
        if (last) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

  // Storage: written on the last cycle of a write, read on the last cycle of
  // a read so that rdata is valid together with done.
  always_ff @(posedge clk) begin
    if (last) begin
      if (op_we) mem[op_idx] <= op_wdata;
      else       rdata       <= mem[op_idx];
    end
  end

endmodule
