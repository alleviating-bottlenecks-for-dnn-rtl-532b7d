// oc_pkg: types and constants shared by the opportunistic computing hardware.
//
// Addresses are 32-bit byte addresses. An L1 data cache block holds 32 words of
// 4 bytes (128 bytes), so a block address is the upper 25 bits of an address;
// two of them make the 50-bit key of the Assign Table and a 3-bit field names one
// of the 7 SMs of a cluster. The word size, block size and 7-SM clusters follow
// the paper's example and overhead figures; the field layout of the messages
// below is this design's own.
package oc_pkg;

  localparam int unsigned ADDR_W      = 32;                  // byte address
  localparam int unsigned WORD_W      = 32;                  // data word and result
  localparam int unsigned BLOCK_WORDS = 32;                  // words per L1 block
  localparam int unsigned BLK_OFF_W   = 7;                   // log2(32 words * 4 bytes)
  localparam int unsigned BLK_ADDR_W  = ADDR_W - BLK_OFF_W;  // 25
  localparam int unsigned SM_ID_W     = 3;                   // SM id inside a cluster
  localparam int unsigned VLEN_W      = 6;                   // vector length 1..32
  localparam int unsigned ROW_W       = 5;                   // window row index 0..31

  typedef logic [ADDR_W-1:0]     addr_t;
  typedef logic [WORD_W-1:0]     word_t;
  typedef logic [BLK_ADDR_W-1:0] blk_addr_t;
  typedef logic [SM_ID_W-1:0]    sm_id_t;

  // One cache block as delivered by the L1 read port.
  typedef word_t [BLOCK_WORDS-1:0] block_t;

  // The operand address pair that identifies one vector computation
  // (input vector x weight vector): the 64 index bits of the Precompute Table.
  typedef struct packed {
    addr_t in_addr;   // address of the first word of the input vector
    addr_t w_addr;    // address of the first word of the weight vector
  } comp_key_t;

  // A computation moved from one SM to another of its cluster.
  typedef struct packed {
    comp_key_t            key;
    addr_t                out_addr;   // where the product is atomically added
    logic [ROW_W-1:0]     w_row;      // weight row of w_addr inside the filter window
  } fwd_msg_t;

  // Atomic add request to the memory system (the accumulation of a product).
  typedef struct packed {
    addr_t addr;
    word_t data;
  } atom_t;

  // One-cycle strobes of the mechanisms of an SM unit, for counters and tests.
  typedef struct packed {
    logic pred_insert;   // a predicted computation entered the Precompute Table
    logic dec_hit;       // a decoded computation used a precomputed result
    logic dec_drop;      // a decoded computation found its entry incomplete
    logic aw_start;      // an assistant warp started
    logic aw_fail;       // an assistant warp found an operand gone from the L1
    logic aged_out;      // periodic removal of the oldest entries
    logic pt_replaced;   // a full Precompute Table overwrote an entry
    logic assigned_in;   // a computation assigned by another SM was accepted
    logic atom_out;      // an assigned result left as an atomic add
  } sm_events_t;

  function automatic blk_addr_t blk_of(addr_t a);
    return a[ADDR_W-1:BLK_OFF_W];
  endfunction

endpackage
