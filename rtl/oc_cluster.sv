// oc_cluster: one cluster of SMs with its shared Computation Assignment Table.
//
// Every SM of the cluster has an oc_sm_unit. Around them the cluster runs the
// inter-SM scheme:
//  * Miss: an SM whose computation stalls on a load miss presents it on
//    miss_* (operand pair, output address, weight row). A round-robin arbiter
//    serves one SM per cycle. The Assign Table is searched with the operands'
//    block pair. On a hit naming another SM, the computation is forwarded into
//    that SM's inbox and the requester is told miss_offloaded = 1: it skips
//    the load and the computation. On a miss the table gets a new entry naming
//    the requester, which loads the blocks from L2 as usual
//    (miss_offloaded = 0). A hit naming the requester itself also returns 0.
//    miss_ready is the one-cycle answer; a request whose target inbox is full
//    waits.
//  * Replacement: an SM whose L1 replaces a block reports it on evict_*; one
//    report per cycle, round robin, removes every Assign Table entry holding
//    that block.
//  * cfg_inter_en = 0 turns the scheme off: every miss is answered at once
//    with miss_offloaded = 0 and the table is left alone.
// The per-SM ports are arrays indexed by the SM's id inside the cluster. The
// search, insert, forward and remove-on-replacement steps follow the paper;
// the arbitration and the mode switch are this design's own choice. Reset is synchronous, active low.
module oc_cluster
  import oc_pkg::*;
#(
  parameter int unsigned N_SM       = 7,
  parameter int unsigned PT_ENTRIES = 256,
  parameter int unsigned AT_ENTRIES = 512,
  parameter int unsigned AGE_PERIOD = 1024,
  parameter int unsigned MAX_AGE    = 3,
  parameter int unsigned THREADS    = 32,
  parameter int unsigned SIMT_WIDTH = 8
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              cfg_intra_en,
  input  logic              cfg_inter_en,
  input  logic [VLEN_W-1:0] cfg_vec_len,
  input  addr_t             cfg_w_stride,
  // decode-time check
  input  logic              dec_valid     [N_SM],
  input  comp_key_t         dec_key       [N_SM],
  output logic              dec_hit       [N_SM],
  output word_t             dec_result    [N_SM],
  // computations performed, for prediction
  input  logic              pr_valid      [N_SM],
  output logic              pr_ready      [N_SM],
  input  comp_key_t         pr_key        [N_SM],
  input  logic [ROW_W-1:0]  pr_w_row      [N_SM],
  // load misses
  input  logic              miss_valid    [N_SM],
  output logic              miss_ready    [N_SM],
  input  fwd_msg_t          miss_msg      [N_SM],
  output logic              miss_offloaded[N_SM],
  // L1 block replacements
  input  logic              evict_valid   [N_SM],
  output logic              evict_ready   [N_SM],
  input  blk_addr_t         evict_blk     [N_SM],
  // SM state and L1 port of the assistant warps
  input  logic              sm_stall      [N_SM],
  output logic              l1_req_valid  [N_SM],
  output blk_addr_t         l1_req_blk    [N_SM],
  input  logic              l1_req_ready  [N_SM],
  input  logic              l1_resp_valid [N_SM],
  input  logic              l1_resp_hit   [N_SM],
  input  block_t            l1_resp_data  [N_SM],
  // atomic adds of assigned results
  output logic              atom_valid    [N_SM],
  input  logic              atom_ready    [N_SM],
  output atom_t             atom          [N_SM],
  output logic              redo_valid    [N_SM],
  input  logic              redo_ready    [N_SM],
  output fwd_msg_t          redo_msg      [N_SM],
  output sm_events_t        ev            [N_SM],
  output logic              ev_offload,     // a miss was moved to another SM
  output logic              ev_at_insert,   // the Assign Table got an entry
  output logic              ev_at_inval,    // a replacement removed entries
  output logic              ev_at_replaced  // a full Assign Table overwrote an entry
);

  localparam int unsigned SW = (N_SM > 1) ? $clog2(N_SM) : 1;

  logic     ib_valid [N_SM];
  logic     ib_ready [N_SM];
  fwd_msg_t ib_msg   [N_SM];

  for (genvar s = 0; s < int'(N_SM); s++) begin : g_sm
    oc_sm_unit #(
      .PT_ENTRIES(PT_ENTRIES), .AGE_PERIOD(AGE_PERIOD), .MAX_AGE(MAX_AGE),
      .THREADS(THREADS), .SIMT_WIDTH(SIMT_WIDTH)
    ) u_sm (
      .clk, .rst_n, .cfg_intra_en, .cfg_vec_len, .cfg_w_stride,
      .dec_valid(dec_valid[s]), .dec_key(dec_key[s]),
      .dec_hit(dec_hit[s]), .dec_result(dec_result[s]),
      .pr_valid(pr_valid[s]), .pr_ready(pr_ready[s]),
      .pr_key(pr_key[s]), .pr_w_row(pr_w_row[s]),
      .inbox_valid(ib_valid[s]), .inbox_ready(ib_ready[s]), .inbox_msg(ib_msg[s]),
      .sm_stall(sm_stall[s]),
      .l1_req_valid(l1_req_valid[s]), .l1_req_blk(l1_req_blk[s]),
      .l1_req_ready(l1_req_ready[s]),
      .l1_resp_valid(l1_resp_valid[s]), .l1_resp_hit(l1_resp_hit[s]),
      .l1_resp_data(l1_resp_data[s]),
      .atom_valid(atom_valid[s]), .atom_ready(atom_ready[s]), .atom(atom[s]),
      .redo_valid(redo_valid[s]), .redo_ready(redo_ready[s]), .redo_msg(redo_msg[s]),
      .ev(ev[s])
    );
  end

  // ------------------------------------------------------------ miss arbiter
  logic [SW-1:0] miss_ptr, evict_ptr;
  logic          m_any, e_any;
  logic [SW-1:0] m_sel, e_sel;

  // first requester at or after the round-robin pointer
  always_comb begin
    m_any = 1'b0; m_sel = '0;
    e_any = 1'b0; e_sel = '0;
    for (int k = 0; k < int'(N_SM); k++) begin
      int s;
      s = int'(miss_ptr) + k;
      if (s >= int'(N_SM)) s = s - int'(N_SM);
      if (!m_any && miss_valid[s]) begin m_any = 1'b1; m_sel = SW'(s); end
      s = int'(evict_ptr) + k;
      if (s >= int'(N_SM)) s = s - int'(N_SM);
      if (!e_any && evict_valid[s]) begin e_any = 1'b1; e_sel = SW'(s); end
    end
  end

  fwd_msg_t  m_msg;
  blk_addr_t lk_a, lk_b;
  logic      at_hit;
  sm_id_t    at_sm;
  logic      m_fwd, m_done, at_ins;
  assign m_msg = miss_msg[m_sel];
  assign lk_a  = blk_of(m_msg.key.in_addr);
  assign lk_b  = blk_of(m_msg.key.w_addr);

  always_comb begin
    m_fwd  = 1'b0;
    m_done = 1'b0;
    at_ins = 1'b0;
    if (m_any) begin
      if (!cfg_inter_en) m_done = 1'b1;
      else if (at_hit && at_sm != sm_id_t'(m_sel) && 32'(at_sm) < N_SM) begin
        m_fwd  = ib_ready[at_sm];
        m_done = ib_ready[at_sm];
      end else begin
        m_done = 1'b1;
        at_ins = !at_hit;
      end
    end
  end

  always_comb begin
    for (int s = 0; s < int'(N_SM); s++) begin
      miss_ready[s]     = m_done && (m_sel == SW'(s));
      miss_offloaded[s] = m_fwd;
      ib_valid[s]       = m_fwd && (at_sm == sm_id_t'(s));
      ib_msg[s]         = m_msg;
      evict_ready[s]    = e_any && (e_sel == SW'(s));
    end
  end

  function automatic logic [SW-1:0] next_sm(logic [SW-1:0] s);
    return (32'(s) == N_SM - 1) ? '0 : s + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      miss_ptr  <= '0;
      evict_ptr <= '0;
    end else begin
      if (m_done) miss_ptr  <= next_sm(m_sel);
      if (e_any)  evict_ptr <= next_sm(e_sel);
    end
  end

  assign_table #(.ENTRIES(AT_ENTRIES)) u_at (
    .clk, .rst_n,
    .lk_a, .lk_b, .lk_hit(at_hit), .lk_sm(at_sm),
    .ins_valid(at_ins), .ins_a(lk_a), .ins_b(lk_b), .ins_sm(sm_id_t'(m_sel)),
    .inv_valid(e_any && cfg_inter_en), .inv_blk(evict_blk[e_sel]),
    .ev_replaced(ev_at_replaced), .ev_invalidated(ev_at_inval)
  );

  assign ev_offload   = m_fwd;
  assign ev_at_insert = at_ins;

endmodule
