// precompute_table: the per-SM table of predicted and assigned computations.
//
// Each entry holds one vector computation (input vector x weight vector),
// identified by its pair of operand addresses (the 64 index bits), a valid bit,
// a complete bit and the 32-bit result, as the paper sizes it. This design adds
// to each entry an 'issued' bit (an assistant warp is computing it), an
// 'assigned' bit with a 32-bit output address (the computation was moved here
// from another SM and its result must be atomically added to that address) and
// a 2-bit age. Reset is synchronous and active low and empties the table.
//
// Search is fully associative over the valid entries. Ports, all served in the
// same cycle:
//  * lookup (decode): lk_key is compared with every valid local (not assigned)
//    entry; lk_hit/lk_complete/lk_result answer combinationally. On lk_valid a
//    hit entry is invalidated: its result is used if complete, and an
//    incomplete one is dropped, as the paper prescribes.
//  * insert: a predicted key that is already present is ignored. An assigned
//    key that matches a complete local entry returns that result at once on
//    ins_done/ins_done_result and frees the entry; one that matches an
//    incomplete local entry turns it into an assigned entry; otherwise a new
//    entry is allocated: the lowest free slot, or, when the table is full, the
//    slot under a circular replacement pointer (ins_ready is low for a cycle if
//    that slot is being computed).
//  * issue: iss_valid/iss_idx/iss_key name the lowest pending entry (valid,
//    not complete, not issued); iss_take marks it issued.
//  * completion: cmp_* writes the assistant warp's result back. A local entry
//    becomes complete; an assigned one is freed and its product leaves on
//    cmp_atom_valid/cmp_atom. cmp_ok low (operand no longer cached) frees it.
//  * ageing: every AGE_PERIOD cycles each valid entry's age goes up by one and
//    entries already at MAX_AGE that are not being computed are removed, which
//    is this design's way of "periodically eliminating the oldest entries".
// The same entry is never matched by an insert in the cycle in which a lookup
// consumes it or a completion writes it; such an insert allocates a new entry.
module precompute_table
  import oc_pkg::*;
#(
  parameter int unsigned ENTRIES    = 256,
  parameter int unsigned AGE_PERIOD = 1024,
  parameter int unsigned MAX_AGE    = 3,
  localparam int unsigned IDX_W     = $clog2(ENTRIES)
) (
  input  logic             clk,
  input  logic             rst_n,
  // decode-time lookup
  input  logic             lk_valid,
  input  comp_key_t        lk_key,
  output logic             lk_hit,
  output logic             lk_complete,
  output word_t            lk_result,
  // insertion
  input  logic             ins_valid,
  input  comp_key_t        ins_key,
  input  logic             ins_assigned,
  input  addr_t            ins_out_addr,
  output logic             ins_ready,
  output logic             ins_done,
  output word_t            ins_done_result,
  // hand-out of pending entries to the assistant warp
  output logic             iss_valid,
  output logic [IDX_W-1:0] iss_idx,
  output comp_key_t        iss_key,
  input  logic             iss_take,
  // write-back from the assistant warp
  input  logic             cmp_valid,
  input  logic [IDX_W-1:0] cmp_idx,
  input  logic             cmp_ok,
  input  word_t            cmp_result,
  output logic             cmp_atom_valid,
  output atom_t            cmp_atom,
  output logic             cmp_redo_valid,
  output fwd_msg_t         cmp_redo,
  // event strobes
  output logic             ev_aged_out,
  output logic             ev_replaced
);

  typedef struct packed {
    logic      valid;
    logic      complete;
    logic      issued;
    logic      assigned;
    logic [1:0] age;
    comp_key_t key;
    word_t     result;
    addr_t     out_addr;
  } entry_t;

  entry_t tbl   [ENTRIES];
  entry_t tbl_n [ENTRIES];

  logic [IDX_W-1:0] repl_ptr;
  logic [$clog2(AGE_PERIOD+1)-1:0] age_cnt;
  logic age_tick;

  assign age_tick = (32'(age_cnt) == AGE_PERIOD - 1);

  // ---------------------------------------------------------------- searches
  logic             lk_found;
  logic [IDX_W-1:0] lk_idx;
  logic             ins_found_any;     // predicted duplicate
  logic             ins_found_local;   // local entry usable by an assigned insert
  logic [IDX_W-1:0] ins_idx;
  logic             free_found;
  logic [IDX_W-1:0] free_idx;

  always_comb begin
    lk_found = 1'b0;  lk_idx = '0;
    ins_found_any = 1'b0; ins_found_local = 1'b0; ins_idx = '0;
    free_found = 1'b0; free_idx = '0;
    iss_valid = 1'b0; iss_idx = '0;
    for (int i = ENTRIES - 1; i >= 0; i--) begin
      if (tbl[i].valid && !tbl[i].assigned && tbl[i].key == lk_key) begin
        lk_found = 1'b1; lk_idx = IDX_W'(i);
      end
      if (!tbl[i].valid) begin
        free_found = 1'b1; free_idx = IDX_W'(i);
      end
      if (tbl[i].valid && !tbl[i].complete && !tbl[i].issued) begin
        iss_valid = 1'b1; iss_idx = IDX_W'(i);
      end
    end
    for (int i = ENTRIES - 1; i >= 0; i--) begin
      if (tbl[i].valid && tbl[i].key == ins_key) begin
        ins_found_any = 1'b1;
        if (!tbl[i].assigned && !(lk_valid && lk_found && lk_idx == IDX_W'(i)) &&
            !(cmp_valid && cmp_idx == IDX_W'(i))) begin
          ins_found_local = 1'b1; ins_idx = IDX_W'(i);
        end
      end
    end
  end

  assign lk_hit      = lk_found;
  assign lk_complete = lk_found && tbl[lk_idx].complete;
  assign lk_result   = tbl[lk_idx].result;
  assign iss_key     = tbl[iss_idx].key;

  // allocation decision
  logic need_alloc, victim_busy;
  always_comb begin
    need_alloc  = ins_assigned ? !ins_found_local : !ins_found_any;
    victim_busy = !free_found &&
                  (tbl[repl_ptr].issued || (iss_take && iss_idx == repl_ptr) ||
                   (lk_valid && lk_found && lk_idx == repl_ptr));
  end
  assign ins_ready = !(need_alloc && victim_busy);

  assign ins_done        = ins_valid && ins_assigned && ins_found_local && tbl[ins_idx].complete;
  assign ins_done_result = tbl[ins_idx].result;

  // completion
  logic cmp_live;
  assign cmp_live       = cmp_valid && tbl[cmp_idx].valid && tbl[cmp_idx].issued;
  assign cmp_atom_valid = cmp_live && cmp_ok && tbl[cmp_idx].assigned;
  assign cmp_atom.addr  = tbl[cmp_idx].out_addr;
  assign cmp_atom.data  = cmp_result;
  // an assigned computation whose operands were gone goes back to the core
  assign cmp_redo_valid       = cmp_live && !cmp_ok && tbl[cmp_idx].assigned;
  assign cmp_redo.key         = tbl[cmp_idx].key;
  assign cmp_redo.out_addr    = tbl[cmp_idx].out_addr;
  assign cmp_redo.w_row       = '0;

  // ---------------------------------------------------------------- next state
  entry_t new_e;
  always_comb begin
    new_e.valid    = 1'b1;
    new_e.complete = 1'b0;
    new_e.issued   = 1'b0;
    new_e.assigned = ins_assigned;
    new_e.age      = 2'd0;
    new_e.key      = ins_key;
    new_e.result   = '0;
    new_e.out_addr = ins_out_addr;
  end

  always_comb begin
    ev_aged_out = 1'b0;
    for (int i = 0; i < ENTRIES; i++) begin
      tbl_n[i] = tbl[i];
      if (age_tick && tbl[i].valid) begin
        if (tbl[i].age == 2'(MAX_AGE) && !tbl[i].issued) begin
          tbl_n[i].valid = 1'b0;
          ev_aged_out    = 1'b1;
        end else if (tbl[i].age != 2'(MAX_AGE)) begin
          tbl_n[i].age = tbl[i].age + 2'd1;
        end
      end
    end
    if (cmp_live) begin
      if (!cmp_ok || tbl[cmp_idx].assigned) begin
        tbl_n[cmp_idx].valid = 1'b0;
      end else begin
        tbl_n[cmp_idx].complete = 1'b1;
        tbl_n[cmp_idx].result   = cmp_result;
      end
      tbl_n[cmp_idx].issued = 1'b0;
    end
    if (lk_valid && lk_found) tbl_n[lk_idx].valid = 1'b0;
    if (iss_take && iss_valid) tbl_n[iss_idx].issued = 1'b1;
    if (ins_valid && ins_ready) begin
      if (need_alloc) begin
        tbl_n[free_found ? free_idx : repl_ptr] = new_e;
      end else if (ins_assigned) begin
        if (tbl[ins_idx].complete) begin
          tbl_n[ins_idx].valid = 1'b0;         // result handed out on ins_done
        end else begin
          tbl_n[ins_idx].assigned = 1'b1;
          tbl_n[ins_idx].out_addr = ins_out_addr;
        end
      end
    end
  end

  assign ev_replaced = ins_valid && ins_ready && need_alloc && !free_found;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int i = 0; i < ENTRIES; i++) tbl[i] <= '0;
      repl_ptr <= '0;
      age_cnt  <= '0;
    end else begin
      for (int i = 0; i < ENTRIES; i++) tbl[i] <= tbl_n[i];
      age_cnt <= age_tick ? '0 : age_cnt + 1'b1;
      // the replacement pointer moves on after each overwrite, and past a
      // slot that could not be taken
      if (ins_valid && need_alloc && !free_found) repl_ptr <= repl_ptr + 1'b1;
    end
  end

  // an entry is handed to the assistant warp only when it is pending
  a_take_pending: assert property (@(posedge clk) disable iff (!rst_n)
                                   iss_take |-> iss_valid);

endmodule
