// oc_gpu: the opportunistic computing hardware of a whole GPU.
//
// The GPU's SMs are grouped into N_CLUSTERS clusters of SMS_PER_CLUSTER SMs
// (8 clusters of 7, for the 56 SMs of the evaluated GPU). Each cluster is an
// oc_cluster with its own Assign Table; clusters share nothing, because
// computations are moved only between SMs of one cluster. The SM pipelines,
// their L1 data caches and the memory system are the unchanged GPU and attach
// through the ports: every per-SM port is an array indexed by the global SM
// number g = cluster * SMS_PER_CLUSTER + SM id inside the cluster. The port
// protocols are described in oc_sm_unit and oc_cluster. cfg_intra_en and
// cfg_inter_en select the evaluated schemes (intra-SM only, inter-SM only, or
// both, the full design). The grouping into clusters follows the paper; the
// flat port arrays and the mode switches are this design's own choice.
// Reset is synchronous, active low.
module oc_gpu
  import oc_pkg::*;
#(
  parameter int unsigned N_CLUSTERS      = 8,
  parameter int unsigned SMS_PER_CLUSTER = 7,
  parameter int unsigned PT_ENTRIES      = 256,
  parameter int unsigned AT_ENTRIES      = 512,
  parameter int unsigned AGE_PERIOD      = 1024,
  parameter int unsigned MAX_AGE         = 3,
  parameter int unsigned THREADS         = 32,
  parameter int unsigned SIMT_WIDTH      = 8,
  localparam int unsigned N_SM           = N_CLUSTERS * SMS_PER_CLUSTER
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              cfg_intra_en,
  input  logic              cfg_inter_en,
  input  logic [VLEN_W-1:0] cfg_vec_len,
  input  addr_t             cfg_w_stride,
  input  logic              dec_valid     [N_SM],
  input  comp_key_t         dec_key       [N_SM],
  output logic              dec_hit       [N_SM],
  output word_t             dec_result    [N_SM],
  input  logic              pr_valid      [N_SM],
  output logic              pr_ready      [N_SM],
  input  comp_key_t         pr_key        [N_SM],
  input  logic [ROW_W-1:0]  pr_w_row      [N_SM],
  input  logic              miss_valid    [N_SM],
  output logic              miss_ready    [N_SM],
  input  fwd_msg_t          miss_msg      [N_SM],
  output logic              miss_offloaded[N_SM],
  input  logic              evict_valid   [N_SM],
  output logic              evict_ready   [N_SM],
  input  blk_addr_t         evict_blk     [N_SM],
  input  logic              sm_stall      [N_SM],
  output logic              l1_req_valid  [N_SM],
  output blk_addr_t         l1_req_blk    [N_SM],
  input  logic              l1_req_ready  [N_SM],
  input  logic              l1_resp_valid [N_SM],
  input  logic              l1_resp_hit   [N_SM],
  input  block_t            l1_resp_data  [N_SM],
  output logic              atom_valid    [N_SM],
  input  logic              atom_ready    [N_SM],
  output atom_t             atom          [N_SM],
  output logic              redo_valid    [N_SM],
  input  logic              redo_ready    [N_SM],
  output fwd_msg_t          redo_msg      [N_SM],
  output sm_events_t        ev            [N_SM],
  output logic              ev_offload    [N_CLUSTERS],
  output logic              ev_at_insert  [N_CLUSTERS],
  output logic              ev_at_inval   [N_CLUSTERS],
  output logic              ev_at_replaced[N_CLUSTERS]
);

  localparam int unsigned K = SMS_PER_CLUSTER;

  for (genvar c = 0; c < int'(N_CLUSTERS); c++) begin : g_cl
    // slices of the global per-SM arrays belonging to this cluster
    logic      c_dec_valid [K], c_dec_hit [K], c_pr_valid [K], c_pr_ready [K];
    logic      c_miss_valid [K], c_miss_ready [K], c_miss_off [K];
    logic      c_ev_valid [K], c_ev_ready [K], c_stall [K];
    logic      c_l1_req_valid [K], c_l1_req_ready [K], c_l1_resp_valid [K], c_l1_resp_hit [K];
    logic      c_atom_valid [K], c_atom_ready [K], c_redo_valid [K], c_redo_ready [K];
    fwd_msg_t  c_redo_msg [K];
    comp_key_t c_dec_key [K], c_pr_key [K];
    word_t     c_dec_result [K];
    logic [ROW_W-1:0] c_pr_w_row [K];
    fwd_msg_t  c_miss_msg [K];
    blk_addr_t c_ev_blk [K], c_l1_req_blk [K];
    block_t    c_l1_resp_data [K];
    atom_t     c_atom [K];
    sm_events_t c_ev [K];

    for (genvar s = 0; s < int'(K); s++) begin : g_map
      localparam int G = c * int'(K) + s;
      assign c_dec_valid[s]     = dec_valid[G];
      assign c_dec_key[s]       = dec_key[G];
      assign dec_hit[G]         = c_dec_hit[s];
      assign dec_result[G]      = c_dec_result[s];
      assign c_pr_valid[s]      = pr_valid[G];
      assign pr_ready[G]        = c_pr_ready[s];
      assign c_pr_key[s]        = pr_key[G];
      assign c_pr_w_row[s]      = pr_w_row[G];
      assign c_miss_valid[s]    = miss_valid[G];
      assign miss_ready[G]      = c_miss_ready[s];
      assign c_miss_msg[s]      = miss_msg[G];
      assign miss_offloaded[G]  = c_miss_off[s];
      assign c_ev_valid[s]      = evict_valid[G];
      assign evict_ready[G]     = c_ev_ready[s];
      assign c_ev_blk[s]        = evict_blk[G];
      assign c_stall[s]         = sm_stall[G];
      assign l1_req_valid[G]    = c_l1_req_valid[s];
      assign l1_req_blk[G]      = c_l1_req_blk[s];
      assign c_l1_req_ready[s]  = l1_req_ready[G];
      assign c_l1_resp_valid[s] = l1_resp_valid[G];
      assign c_l1_resp_hit[s]   = l1_resp_hit[G];
      assign c_l1_resp_data[s]  = l1_resp_data[G];
      assign atom_valid[G]      = c_atom_valid[s];
      assign c_atom_ready[s]    = atom_ready[G];
      assign atom[G]            = c_atom[s];
      assign redo_valid[G]      = c_redo_valid[s];
      assign c_redo_ready[s]    = redo_ready[G];
      assign redo_msg[G]        = c_redo_msg[s];
      assign ev[G]              = c_ev[s];
    end

    oc_cluster #(
      .N_SM(K), .PT_ENTRIES(PT_ENTRIES), .AT_ENTRIES(AT_ENTRIES),
      .AGE_PERIOD(AGE_PERIOD), .MAX_AGE(MAX_AGE),
      .THREADS(THREADS), .SIMT_WIDTH(SIMT_WIDTH)
    ) u_cluster (
      .clk, .rst_n, .cfg_intra_en, .cfg_inter_en, .cfg_vec_len, .cfg_w_stride,
      .dec_valid(c_dec_valid), .dec_key(c_dec_key), .dec_hit(c_dec_hit),
      .dec_result(c_dec_result),
      .pr_valid(c_pr_valid), .pr_ready(c_pr_ready), .pr_key(c_pr_key),
      .pr_w_row(c_pr_w_row),
      .miss_valid(c_miss_valid), .miss_ready(c_miss_ready), .miss_msg(c_miss_msg),
      .miss_offloaded(c_miss_off),
      .evict_valid(c_ev_valid), .evict_ready(c_ev_ready), .evict_blk(c_ev_blk),
      .sm_stall(c_stall),
      .l1_req_valid(c_l1_req_valid), .l1_req_blk(c_l1_req_blk),
      .l1_req_ready(c_l1_req_ready),
      .l1_resp_valid(c_l1_resp_valid), .l1_resp_hit(c_l1_resp_hit),
      .l1_resp_data(c_l1_resp_data),
      .atom_valid(c_atom_valid), .atom_ready(c_atom_ready), .atom(c_atom),
      .redo_valid(c_redo_valid), .redo_ready(c_redo_ready), .redo_msg(c_redo_msg),
      .ev(c_ev),
      .ev_offload(ev_offload[c]), .ev_at_insert(ev_at_insert[c]),
      .ev_at_inval(ev_at_inval[c]), .ev_at_replaced(ev_at_replaced[c])
    );
  end

endmodule
