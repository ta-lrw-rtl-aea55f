// talrw_pkg: constants and types shared by the TA-LRW L2 cache.
//
// The cache is the 1 MB, 8-way, 64-byte-block STT-MRAM L2 of the reference
// system: 2048 sets of 8 blocks. The write permutation is the one the
// replacement policy uses to spread consecutive writes of a set over
// physically distant blocks: B0 -> B5 -> B2 -> B7 -> B3 -> B6 -> B1 -> B4 ->
// back to B0. Every step moves at least three blocks (steps of 3, 4 and 5
// blocks occur 3, 2 and 3 times per round).
//
// The 32-bit byte address, the request encoding and the structs below are
// choices of this implementation; the cache geometry, the block timing and
// the permutation follow the published design.
package talrw_pkg;

  localparam int unsigned WAYS        = 8;
  localparam int unsigned PTR_W       = $clog2(WAYS);
  localparam int unsigned DEF_SETS    = 2048;        // 1 MB / (64 B * 8 ways)
  localparam int unsigned BLOCK_BYTES = 64;
  localparam int unsigned BLOCK_BITS  = BLOCK_BYTES * 8;
  localparam int unsigned OFFSET_W    = $clog2(BLOCK_BYTES);
  localparam int unsigned ADDR_W      = 32;
  localparam int unsigned DEF_READ_LAT  = 10;          // 10 ns at 1 GHz
  localparam int unsigned DEF_WRITE_LAT = 20;          // 20 ns at 1 GHz

  typedef logic [PTR_W-1:0]      ptr_t;
  typedef logic [WAYS-1:0]       way_mask_t;
  typedef logic [BLOCK_BITS-1:0] block_t;

  // Write sequence: position k of a round writes block WRITE_PERM[k].
  localparam ptr_t WRITE_PERM [WAYS] = '{3'd0, 3'd5, 3'd2, 3'd7, 3'd3, 3'd6, 3'd1, 3'd4};

  // Request from L1.
  typedef enum logic [0:0] {
    REQ_READ      = 1'b0,   // L1 read (demand fetch)
    REQ_WRITEBACK = 1'b1    // L1 writeback of a full dirty block
  } req_type_e;

  // One-cycle pulses, one per decision of the controller, for monitoring.
  typedef struct packed {
    logic rd_hit;           // read hit: block returned from the array
    logic rd_miss;          // read miss: block fetched and written to the pointed block
    logic wb_hit_inplace;   // writeback hit on the block the pointer selects
    logic wb_hit_redirect;  // writeback hit elsewhere: found block invalidated
    logic wb_miss;          // writeback miss: written to the pointed block
    logic evict;            // dirty block under the pointer written back to memory
  } evt_t;

  // Tag bits for a cache of the given number of sets.
  function automatic int unsigned tag_width(int unsigned sets);
    return ADDR_W - OFFSET_W - $clog2(sets);
  endfunction

  // Successor of block b in the write permutation.
  function automatic ptr_t perm_next(ptr_t b);
    ptr_t r = WRITE_PERM[0];
    for (int k = 0; k < WAYS; k++)
      if (WRITE_PERM[k] == b) r = WRITE_PERM[(k + 1) % WAYS];
    return r;
  endfunction

endpackage
