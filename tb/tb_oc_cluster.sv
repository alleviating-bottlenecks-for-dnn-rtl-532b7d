// tb_oc_cluster: self-checking test of a cluster (3 SMs, small tables).
// Follows the inter-SM workflow: SM 0 misses on the block pair (A, B), finds
// no entry and becomes its holder; SM 1 then misses on the same pair and its
// computation is moved to SM 0, which computes it in a stall and sends the
// product as an atomic add to SM 1's output address. Also checked: a miss
// naming the requester itself, removal of the entry when SM 0 replaces block
// A, simultaneous misses of all SMs (round-robin service), and that with the
// inter-SM scheme off nothing is moved, and that moved work whose block has
// left the holder's L1 is handed back to the holder's core on the redo port.
module tb_oc_cluster;
  import oc_pkg::*;
  import tb_pkg::*;

  localparam int N = 3;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic cfg_intra_en, cfg_inter_en;
  logic [VLEN_W-1:0] cfg_vec_len;
  addr_t cfg_w_stride;
  logic dec_valid [N], dec_hit [N], pr_valid [N], pr_ready [N];
  comp_key_t dec_key [N], pr_key [N];
  word_t dec_result [N];
  logic [ROW_W-1:0] pr_w_row [N];
  logic miss_valid [N], miss_ready [N], miss_offloaded [N];
  fwd_msg_t miss_msg [N];
  logic evict_valid [N], evict_ready [N];
  blk_addr_t evict_blk [N];
  logic sm_stall [N];
  logic l1_req_valid [N], l1_req_ready [N], l1_resp_valid [N], l1_resp_hit [N];
  blk_addr_t l1_req_blk [N];
  block_t l1_resp_data [N];
  logic atom_valid [N], atom_ready [N];
  atom_t atom [N];
  logic redo_valid [N], redo_ready [N];
  fwd_msg_t redo_msg [N];
  sm_events_t ev [N];
  logic ev_offload, ev_at_insert, ev_at_inval, ev_at_replaced;

  oc_cluster #(.N_SM(N), .PT_ENTRIES(16), .AT_ENTRIES(16), .AGE_PERIOD(4096)) dut (.*);

  for (genvar s = 0; s < N; s++) begin : g_l1
    l1_model #(.LAT(2)) u_l1 (
      .clk, .rst_n, .miss_mask(mask[s]),
      .req_valid(l1_req_valid[s]), .req_blk(l1_req_blk[s]), .req_ready(l1_req_ready[s]),
      .resp_valid(l1_resp_valid[s]), .resp_hit(l1_resp_hit[s]), .resp_data(l1_resp_data[s]));
  end

  int checks = 0, failures = 0;
  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic [63:0] mask [N];
  fwd_msg_t redos [N][$];
  atom_t atoms [N][$];
  int n_off;
  always @(posedge clk) if (rst_n) begin
    for (int s = 0; s < N; s++) if (atom_valid[s]) atoms[s].push_back(atom[s]);
    for (int s = 0; s < N; s++) if (redo_valid[s]) redos[s].push_back(redo_msg[s]);
    n_off += int'(ev_offload);
  end

  // one miss from SM s; returns whether it was moved and the cycles it waited
  task automatic miss(input int s, input addr_t ia, input addr_t wa, input addr_t oa,
                      output logic off);
    @(negedge clk);
    miss_valid[s] = 1;
    miss_msg[s] = '{key: '{in_addr: ia, w_addr: wa}, out_addr: oa, w_row: '0};
    #1 while (!miss_ready[s]) begin @(negedge clk); #1; end
    off = miss_offloaded[s];
    @(negedge clk); miss_valid[s] = 0;
  endtask

  task automatic evict(input int s, input blk_addr_t b);
    @(negedge clk);
    evict_valid[s] = 1; evict_blk[s] = b;
    #1 while (!evict_ready[s]) begin @(negedge clk); #1; end
    @(negedge clk); evict_valid[s] = 0;
  endtask

  task automatic stall_all(input int n);
    @(negedge clk);
    for (int s = 0; s < N; s++) sm_stall[s] = 1;
    repeat (n) @(negedge clk);
    for (int s = 0; s < N; s++) sm_stall[s] = 0;
    repeat (20) @(negedge clk);
  endtask

  initial begin
    #400000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  localparam addr_t A = 32'h0000_4000, B = 32'h0008_0040;

  initial begin
    logic off;
    int done_at [N];
    cfg_intra_en = 0; cfg_inter_en = 1; cfg_vec_len = 6'd5; cfg_w_stride = 32'd20;
    n_off = 0;
    for (int s = 0; s < N; s++) begin
      dec_valid[s] = 0; dec_key[s] = '0; pr_valid[s] = 0; pr_key[s] = '0; pr_w_row[s] = '0;
      miss_valid[s] = 0; miss_msg[s] = '0; evict_valid[s] = 0; evict_blk[s] = '0;
      sm_stall[s] = 0; atom_ready[s] = 1; redo_ready[s] = 1; mask[s] = '0;
    end
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;

    miss(0, A, B, 32'h100, off);
    check(!off, "first miss on (A,B) is not moved");
    miss(0, A + 4, B + 8, 32'h104, off);
    check(!off, "miss naming the requester itself is not moved");
    miss(1, A + 8, B, 32'h0010_0000, off);
    check(off, "SM 1's miss on (A,B) moved to SM 0");
    stall_all(40);
    check(atoms[0].size() == 1 && atoms[1].size() == 0, "SM 0 writes the moved product");
    if (atoms[0].size() > 0)
      check(atoms[0][0].addr == 32'h0010_0000 && atoms[0][0].data == ref_dot(A + 8, B, 5),
            "atomic add of the moved computation");
    // SM 0 replaces block A: the entry goes, the next miss is not moved
    evict(0, blk_of(A));
    miss(2, A, B, 32'h200, off);
    check(!off, "entry removed with the replaced block");
    miss(1, A, B + 20, 32'h300, off);
    check(off, "SM 2 is now the holder of (A,B)");
    // all three miss on pairs held by others at once
    miss(0, 32'h0000_8000, 32'h0009_0000, 32'h0, off);   // holder 0
    fork
      begin miss(1, 32'h0000_8010, 32'h0009_0000, 32'h400, off); check(off, "concurrent 1 moved"); done_at[1] = $time; end
      begin miss(2, 32'h0000_8020, 32'h0009_0000, 32'h500, off); check(off, "concurrent 2 moved"); done_at[2] = $time; end
    join
    check(done_at[1] != done_at[2], "one miss served per cycle");
    stall_all(80);
    check(atoms[0].size() == 3 && atoms[2].size() == 1, "moved work done by the holders");
    // moved work whose block has left the holder's L1 goes back to its core
    mask[2] = 64'd1 << blk_of(A)[5:0];
    miss(0, A + 12, B, 32'h0020_0000, off);
    check(off, "moved to SM 2");
    stall_all(40);
    check(redos[2].size() == 1 && atoms[2].size() == 1, "SM 2 hands the work to its core");
    if (redos[2].size() > 0)
      check(redos[2][0].key.in_addr == A + 12 && redos[2][0].key.w_addr == B &&
            redos[2][0].out_addr == 32'h0020_0000, "redo carries the computation");
    mask[2] = '0;
    // inter-SM scheme off
    cfg_inter_en = 0;
    miss(1, 32'h0000_8030, 32'h0009_0000, 32'h600, off);
    check(!off, "nothing moved with the inter-SM scheme off");
    check(n_off == 5, $sformatf("offload count %0d", n_off));

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
