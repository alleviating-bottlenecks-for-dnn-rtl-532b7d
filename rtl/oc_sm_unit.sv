// oc_sm_unit: the opportunistic computing hardware added to one SM.
//
// It joins the Precompute Table, the prediction logic and the assistant warp,
// and receives the computations that other SMs of the cluster move to this SM.
//  * Decode: the SM core presents the operand address pair of every decoded
//    vector computation on dec_*; dec_hit says the result is already in the
//    table (dec_result), and the SM then skips the loads and the computation.
//  * Prediction: when the core performs a computation it reports it on pr_*,
//    with the weight row index; pred_gen turns it into predicted entries.
//  * Stall: while sm_stall is high the assistant warp computes pending entries
//    one after another, reading operands through the l1_* port.
//  * Assigned work: inbox_* carries (input addr, weight addr, output addr,
//    weight row) from other SMs. It is inserted into the table as an assigned
//    entry (or answered at once if the result is already there), and also fed
//    to the prediction logic, since an assigned computation predicts future
//    ones just like a local one. Finished assigned results leave on atom_* as
//    atomic adds to their output address; the requesting SM never reads them.
//    Assigned work whose operand has left the L1 by the time the assistant
//    warp reaches it is handed to the core on redo_* (this design's addition:
//    the paper does not say what happens then, and the requester has already
//    skipped the computation).
//  * cfg_intra_en switches prediction off (the table then holds only assigned
//    work); the inter-SM part is switched in the cluster.
// Arbitration (this design's own): the inbox has priority over the prediction
// stream at the table's insert port, and over the core at the predictor; an
// inbox insert waits in a cycle in which the assistant warp writes back, so at
// most one atomic add is queued per cycle. Depths of the two FIFOs are
// assumed. Reset is synchronous, active low.
module oc_sm_unit
  import oc_pkg::*;
#(
  parameter int unsigned PT_ENTRIES  = 256,
  parameter int unsigned AGE_PERIOD  = 1024,
  parameter int unsigned MAX_AGE     = 3,
  parameter int unsigned THREADS     = 32,
  parameter int unsigned SIMT_WIDTH  = 8,
  parameter int unsigned INBOX_DEPTH = 4,
  parameter int unsigned ATOM_DEPTH  = 4
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              cfg_intra_en,
  input  logic [VLEN_W-1:0] cfg_vec_len,
  input  addr_t             cfg_w_stride,
  // decode-time check
  input  logic              dec_valid,
  input  comp_key_t         dec_key,
  output logic              dec_hit,
  output word_t             dec_result,
  // computations performed by the core, for prediction
  input  logic              pr_valid,
  output logic              pr_ready,
  input  comp_key_t         pr_key,
  input  logic [ROW_W-1:0]  pr_w_row,
  // computations assigned by other SMs of the cluster
  input  logic              inbox_valid,
  output logic              inbox_ready,
  input  fwd_msg_t          inbox_msg,
  // SM state and L1 read port for the assistant warp
  input  logic              sm_stall,
  output logic              l1_req_valid,
  output blk_addr_t         l1_req_blk,
  input  logic              l1_req_ready,
  input  logic              l1_resp_valid,
  input  logic              l1_resp_hit,
  input  block_t            l1_resp_data,
  // atomic adds of assigned results to memory
  output logic              atom_valid,
  input  logic              atom_ready,
  output atom_t             atom,
  // assigned work the assistant warp could not do from the L1: the core must
  // execute it as a normal computation (load, multiply, atomic add)
  output logic              redo_valid,
  input  logic              redo_ready,
  output fwd_msg_t          redo_msg,
  output sm_events_t        ev
);

  localparam int unsigned IDX_W = $clog2(PT_ENTRIES);

  // ------------------------------------------------------------ inbox
  logic     ib_valid, ib_pop;
  fwd_msg_t ib_msg;
  oc_fifo #(.T(fwd_msg_t), .DEPTH(INBOX_DEPTH)) u_inbox (
    .clk, .rst_n,
    .in_valid (inbox_valid), .in_ready (inbox_ready), .in_data (inbox_msg),
    .out_valid(ib_valid),    .out_ready(ib_pop),      .out_data(ib_msg)
  );

  // head of the inbox: first insert into the table, then to the predictor
  logic ib_phase_pred;

  // ------------------------------------------------------------ table
  logic             pt_lk_hit, pt_lk_complete;
  word_t            pt_lk_result;
  logic             pt_ins_valid, pt_ins_assigned, pt_ins_ready, pt_ins_done;
  comp_key_t        pt_ins_key;
  addr_t            pt_ins_out;
  word_t            pt_ins_done_result;
  logic             pt_iss_valid, pt_iss_take;
  logic [IDX_W-1:0] pt_iss_idx, aw_cmp_idx;
  comp_key_t        pt_iss_key;
  logic             aw_cmp_valid, aw_cmp_ok, aw_cmp_ready;
  word_t            aw_cmp_result;
  logic             pt_atom_valid, pt_redo_valid;
  atom_t            pt_atom;
  fwd_msg_t         pt_redo;
  logic             rq_in_ready;
  logic             ev_aged, ev_repl;

  // ------------------------------------------------------------ atomic queue
  logic  aq_in_valid, aq_in_ready;
  atom_t aq_in;
  oc_fifo #(.T(atom_t), .DEPTH(ATOM_DEPTH)) u_atomq (
    .clk, .rst_n,
    .in_valid (aq_in_valid), .in_ready (aq_in_ready), .in_data (aq_in),
    .out_valid(atom_valid),  .out_ready(atom_ready),  .out_data(atom)
  );

  // inbox insert may go when the atomic queue can take a possible answer and
  // the assistant warp is not writing back in this cycle
  logic ib_ins_go;
  assign ib_ins_go = ib_valid && !ib_phase_pred && aq_in_ready && !aw_cmp_valid;

  // prediction stream
  logic      pg_req_valid, pg_req_ready, pg_out_valid, pg_out_ready;
  comp_key_t pg_req_key, pg_out_key;
  logic [ROW_W-1:0] pg_req_row;
  logic      ib_to_pred;
  assign ib_to_pred = ib_valid && ib_phase_pred && cfg_intra_en;

  always_comb begin
    if (ib_to_pred) begin
      pg_req_valid = 1'b1;
      pg_req_key   = ib_msg.key;
      pg_req_row   = ib_msg.w_row;
    end else begin
      pg_req_valid = pr_valid && cfg_intra_en;
      pg_req_key   = pr_key;
      pg_req_row   = pr_w_row;
    end
  end
  // with prediction off, reports from the core are accepted and ignored
  assign pr_ready = cfg_intra_en ? (pg_req_ready && !ib_to_pred) : 1'b1;

  pred_gen u_pred (
    .clk, .rst_n,
    .cfg_w_stride,
    .req_valid(pg_req_valid), .req_ready(pg_req_ready),
    .req_key  (pg_req_key),   .req_w_row(pg_req_row),
    .out_valid(pg_out_valid), .out_ready(pg_out_ready), .out_key(pg_out_key)
  );

  // table insert port: the inbox first, then predictions
  always_comb begin
    if (ib_ins_go) begin
      pt_ins_valid    = 1'b1;
      pt_ins_key      = ib_msg.key;
      pt_ins_assigned = 1'b1;
      pt_ins_out      = ib_msg.out_addr;
    end else begin
      pt_ins_valid    = pg_out_valid;
      pt_ins_key      = pg_out_key;
      pt_ins_assigned = 1'b0;
      pt_ins_out      = '0;
    end
  end
  assign pg_out_ready = !ib_ins_go && pt_ins_ready;

  // inbox sequencing
  assign ib_pop = ib_valid && ib_phase_pred &&
                  (!cfg_intra_en || pg_req_ready);
  always_ff @(posedge clk) begin
    if (!rst_n) ib_phase_pred <= 1'b0;
    else if (ib_ins_go && pt_ins_ready) ib_phase_pred <= 1'b1;
    else if (ib_pop)                    ib_phase_pred <= 1'b0;
  end

  precompute_table #(
    .ENTRIES(PT_ENTRIES), .AGE_PERIOD(AGE_PERIOD), .MAX_AGE(MAX_AGE)
  ) u_pt (
    .clk, .rst_n,
    .lk_valid(dec_valid), .lk_key(dec_key),
    .lk_hit(pt_lk_hit), .lk_complete(pt_lk_complete), .lk_result(pt_lk_result),
    .ins_valid(pt_ins_valid), .ins_key(pt_ins_key), .ins_assigned(pt_ins_assigned),
    .ins_out_addr(pt_ins_out), .ins_ready(pt_ins_ready),
    .ins_done(pt_ins_done), .ins_done_result(pt_ins_done_result),
    .iss_valid(pt_iss_valid), .iss_idx(pt_iss_idx), .iss_key(pt_iss_key),
    .iss_take(pt_iss_take),
    .cmp_valid(aw_cmp_valid && aw_cmp_ready), .cmp_idx(aw_cmp_idx), .cmp_ok(aw_cmp_ok),
    .cmp_result(aw_cmp_result),
    .cmp_atom_valid(pt_atom_valid), .cmp_atom(pt_atom),
    .cmp_redo_valid(pt_redo_valid), .cmp_redo(pt_redo),
    .ev_aged_out(ev_aged), .ev_replaced(ev_repl)
  );

  assign dec_hit    = dec_valid && pt_lk_hit && pt_lk_complete;
  assign dec_result = pt_lk_result;

  // atomic adds: an immediate answer to an inbox insert, or a finished
  // assigned entry; never both in one cycle (see ib_ins_go)
  always_comb begin
    if (pt_ins_done) begin
      aq_in_valid = 1'b1;
      aq_in.addr  = ib_msg.out_addr;
      aq_in.data  = pt_ins_done_result;
    end else begin
      aq_in_valid = pt_atom_valid;
      aq_in       = pt_atom;
    end
  end
  assign aw_cmp_ready = aq_in_ready && rq_in_ready;

  oc_fifo #(.T(fwd_msg_t), .DEPTH(ATOM_DEPTH)) u_redoq (
    .clk, .rst_n,
    .in_valid (pt_redo_valid), .in_ready (rq_in_ready), .in_data (pt_redo),
    .out_valid(redo_valid),    .out_ready(redo_ready),  .out_data(redo_msg)
  );

  logic aw_busy;
  assistant_warp #(
    .THREADS(THREADS), .SIMT_WIDTH(SIMT_WIDTH), .NREGS(3), .IDX_W(IDX_W)
  ) u_aw (
    .clk, .rst_n, .sm_stall, .cfg_vec_len,
    .iss_valid(pt_iss_valid), .iss_idx(pt_iss_idx), .iss_key(pt_iss_key),
    .iss_take(pt_iss_take),
    .l1_req_valid, .l1_req_blk, .l1_req_ready,
    .l1_resp_valid, .l1_resp_hit, .l1_resp_data,
    .cmp_valid(aw_cmp_valid), .cmp_idx(aw_cmp_idx), .cmp_ok(aw_cmp_ok),
    .cmp_result(aw_cmp_result), .cmp_ready(aw_cmp_ready),
    .busy(aw_busy)
  );

  always_comb begin
    ev             = '0;
    ev.pred_insert = pt_ins_valid && pt_ins_ready && !pt_ins_assigned;
    ev.dec_hit     = dec_hit;
    ev.dec_drop    = dec_valid && pt_lk_hit && !pt_lk_complete;
    ev.aw_start    = pt_iss_take;
    ev.aw_fail     = aw_cmp_valid && aw_cmp_ready && !aw_cmp_ok;
    ev.aged_out    = ev_aged;
    ev.pt_replaced = ev_repl;
    ev.assigned_in = ib_ins_go && pt_ins_ready;
    ev.atom_out    = atom_valid && atom_ready;
  end

  // the assistant warp only starts while the SM is stalled
  a_aw_on_stall: assert property (@(posedge clk) disable iff (!rst_n)
                                  pt_iss_take |-> sm_stall && !aw_busy);

endmodule
