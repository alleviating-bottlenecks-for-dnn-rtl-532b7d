// assign_table: the Computation Assignment Table of one SM cluster.
//
// Each entry maps a computing cache block pair (A, B), the 25-bit block
// addresses of an input block and a weight block (50 bits, as in the paper),
// to the 3-bit id of the SM of the cluster that holds both blocks in its L1.
// The table is searched fully associatively:
//  * lookup: lk_a/lk_b are compared with all valid entries; lk_hit and lk_sm
//    answer combinationally.
//  * insert: writes (ins_a, ins_b) -> ins_sm; an existing entry with the same
//    pair is overwritten, else the lowest free slot is used, else the slot
//    under a circular replacement pointer (this policy is this design's own:
//    the paper only limits the table to 512 entries).
//  * invalidate: when a block leaves an SM's L1, every entry whose A or B
//    equals inv_blk is removed in that cycle, as the paper describes. The
//    invalidation acts on the table before a same-cycle insert is written.
// Reset (synchronous, active low) empties the table.
module assign_table
  import oc_pkg::*;
#(
  parameter int unsigned ENTRIES = 512,
  localparam int unsigned IDX_W  = $clog2(ENTRIES)
) (
  input  logic      clk,
  input  logic      rst_n,
  input  blk_addr_t lk_a,
  input  blk_addr_t lk_b,
  output logic      lk_hit,
  output sm_id_t    lk_sm,
  input  logic      ins_valid,
  input  blk_addr_t ins_a,
  input  blk_addr_t ins_b,
  input  sm_id_t    ins_sm,
  input  logic      inv_valid,
  input  blk_addr_t inv_blk,
  output logic      ev_replaced,
  output logic      ev_invalidated
);

  typedef struct packed {
    logic      valid;
    blk_addr_t a;
    blk_addr_t b;
    sm_id_t    sm;
  } at_entry_t;

  at_entry_t tbl [ENTRIES];
  logic [IDX_W-1:0] repl_ptr;

  logic             lk_found, ins_found, free_found;
  logic [IDX_W-1:0] lk_idx, ins_idx, free_idx;
  logic [ENTRIES-1:0] inv_hit;

  always_comb begin
    lk_found = 1'b0; lk_idx = '0;
    ins_found = 1'b0; ins_idx = '0;
    free_found = 1'b0; free_idx = '0;
    for (int i = ENTRIES - 1; i >= 0; i--) begin
      inv_hit[i] = inv_valid && tbl[i].valid && (tbl[i].a == inv_blk || tbl[i].b == inv_blk);
      if (tbl[i].valid && tbl[i].a == lk_a && tbl[i].b == lk_b) begin
        lk_found = 1'b1; lk_idx = IDX_W'(i);
      end
      if (tbl[i].valid && tbl[i].a == ins_a && tbl[i].b == ins_b) begin
        ins_found = 1'b1; ins_idx = IDX_W'(i);
      end
      if (!tbl[i].valid || inv_hit[i]) begin
        free_found = 1'b1; free_idx = IDX_W'(i);
      end
    end
  end

  assign lk_hit         = lk_found;
  assign lk_sm          = tbl[lk_idx].sm;
  assign ev_replaced    = ins_valid && !ins_found && !free_found;
  assign ev_invalidated = |inv_hit;

  logic [IDX_W-1:0] wr_idx;
  always_comb begin
    if (ins_found && !inv_hit[ins_idx]) wr_idx = ins_idx;
    else if (free_found)               wr_idx = free_idx;
    else                               wr_idx = repl_ptr;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int i = 0; i < ENTRIES; i++) tbl[i] <= '0;
      repl_ptr <= '0;
    end else begin
      for (int i = 0; i < ENTRIES; i++)
        if (inv_hit[i]) tbl[i].valid <= 1'b0;
      if (ins_valid) begin
        tbl[wr_idx] <= '{valid: 1'b1, a: ins_a, b: ins_b, sm: ins_sm};
        if (!(ins_found && !inv_hit[ins_idx]) && !free_found) repl_ptr <= repl_ptr + 1'b1;
      end
    end
  end

endmodule
