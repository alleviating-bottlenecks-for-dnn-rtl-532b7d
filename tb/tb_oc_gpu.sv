// tb_oc_gpu: end-to-end test of the whole design at its default size
// (8 clusters of 7 SMs, 256-entry Precompute Tables, 512-entry Assign Tables).
//
// Every SM runs a direct 3x3 convolution over three output rows of its
// cluster's input map, rows starting at its own SM id so that neighbouring
// SMs share input rows. For each vector computation (window row j of output
// (r, x)) the SM model in this test first checks the Precompute Table at
// decode; on a hit the result is compared with a product computed here. The
// window's first column of every row misses in the L1 (the blocks were
// replaced, as in the paper's example); the miss goes to the cluster, and
// a computation moved to another SM is expected back as an atomic add (or,
// if the holder has lost the block, as a redo on the holder's port). Local
// computations are reported for prediction. The SM stalls after each
// window and on each miss, when assistant warps run. SM 3 of every cluster
// misses on blocks 32 mod 64 when its assistant warp reads them.
// Later phases overfill one Precompute Table and one Assign Table, decode a
// prediction before it is computed, switch each scheme off, and leave the
// design idle until old entries are aged out. Each mechanism is counted and
// a mechanism that never happened is a failure; every moved computation
// must have been accounted for exactly once.
module tb_oc_gpu;
  import oc_pkg::*;
  import tb_pkg::*;

  localparam int NC = 8, SPC = 7, N = NC * SPC;
  localparam int ROWS = 3, X = 6, KW = 3;
  localparam int STALL_MISS = 30, STALL_WIN = 25;

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
  logic ev_offload [NC], ev_at_insert [NC], ev_at_inval [NC], ev_at_replaced [NC];

  oc_gpu dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  // ------------------------------------------------ moved computations
  word_t expected [addr_t];     // output address -> product still owed
  int    n_redo = 0, n_atom_ok = 0;
  always @(posedge clk) if (rst_n) begin
    for (int g = 0; g < N; g++) begin
      if (atom_valid[g]) begin
        check(expected.exists(atom[g].addr) && expected[atom[g].addr] == atom[g].data,
              $sformatf("atomic add from SM %0d to %h", g, atom[g].addr));
        if (expected.exists(atom[g].addr)) expected.delete(atom[g].addr);
        n_atom_ok++;
      end
      if (redo_valid[g]) begin
        // the core redoes it; its product is checked here as the core would compute it
        check(expected.exists(redo_msg[g].out_addr) &&
              expected[redo_msg[g].out_addr] == ref_dot(redo_msg[g].key.in_addr, redo_msg[g].key.w_addr, KW),
              "redo of moved work");
        if (expected.exists(redo_msg[g].out_addr)) expected.delete(redo_msg[g].out_addr);
        n_redo++;
      end
    end
  end

  // ------------------------------------------------ mechanism counters
  int c_pred, c_hit, c_drop, c_aw, c_awfail, c_aged, c_ptrepl, c_asg, c_atom;
  int c_off, c_atins, c_atinv, c_atrepl;
  always @(posedge clk) if (rst_n) begin
    for (int g = 0; g < N; g++) begin
      c_pred += int'(ev[g].pred_insert);  c_hit   += int'(ev[g].dec_hit);
      c_drop += int'(ev[g].dec_drop);     c_aw    += int'(ev[g].aw_start);
      c_awfail += int'(ev[g].aw_fail);    c_aged  += int'(ev[g].aged_out);
      c_ptrepl += int'(ev[g].pt_replaced); c_asg  += int'(ev[g].assigned_in);
      c_atom += int'(ev[g].atom_out);
    end
    for (int c = 0; c < NC; c++) begin
      c_off += int'(ev_offload[c]); c_atins += int'(ev_at_insert[c]);
      c_atinv += int'(ev_at_inval[c]); c_atrepl += int'(ev_at_replaced[c]);
    end
  end

  // ------------------------------------------------ L1 models
  for (genvar g = 0; g < N; g++) begin : g_l1
    l1_model #(.LAT(2)) u_l1 (
      .clk, .rst_n, .miss_mask((g % SPC == 3) ? (64'd1 << 32) : 64'd0),
      .req_valid(l1_req_valid[g]), .req_blk(l1_req_blk[g]), .req_ready(l1_req_ready[g]),
      .resp_valid(l1_resp_valid[g]), .resp_hit(l1_resp_hit[g]), .resp_data(l1_resp_data[g]));
  end

  // ------------------------------------------------ SM models
  function automatic addr_t in_addr(int c, int row, int x);
    return 32'h0100_0000 + addr_t'(c) * 32'h0010_0000 + addr_t'(row) * 32'h1000 + addr_t'(x) * 4;
  endfunction
  function automatic addr_t w_addr(int c, int j);
    return 32'h0800_0000 + addr_t'(c) * 32'h1000 + addr_t'(j) * 12;
  endfunction
  function automatic addr_t out_addr(int g, int r, int x, int j);
    return 32'h0C00_0000 + addr_t'(((g * 64 + r * X + x) * 4 + j) * 4);
  endfunction

  int done_cnt = 0;
  int n_hit_ok = 0;

  for (genvar g = 0; g < N; g++) begin : g_sm
    localparam int C = g / SPC, S = g % SPC;

    task automatic do_stall(input int n);
      sm_stall[g] = 1;
      repeat (n) @(negedge clk);
      sm_stall[g] = 0;
    endtask

    task automatic report(input comp_key_t k, input int j);
      pr_valid[g] = 1; pr_key[g] = k; pr_w_row[g] = ROW_W'(j);
      #1 while (!pr_ready[g]) begin @(negedge clk); #1; end
      @(negedge clk); pr_valid[g] = 0;
    endtask

    task automatic miss(input comp_key_t k, input addr_t oa, output logic off);
      miss_valid[g] = 1; miss_msg[g] = '{key: k, out_addr: oa, w_row: '0};
      #1 while (!miss_ready[g]) begin @(negedge clk); #1; end
      off = miss_offloaded[g];
      @(negedge clk); miss_valid[g] = 0;
    endtask

    task automatic evict(input blk_addr_t b);
      evict_valid[g] = 1; evict_blk[g] = b;
      #1 while (!evict_ready[g]) begin @(negedge clk); #1; end
      @(negedge clk); evict_valid[g] = 0;
    endtask

    initial begin
      dec_valid[g] = 0; dec_key[g] = '0; pr_valid[g] = 0; pr_key[g] = '0; pr_w_row[g] = '0;
      miss_valid[g] = 0; miss_msg[g] = '0; evict_valid[g] = 0; evict_blk[g] = '0;
      sm_stall[g] = 0; atom_ready[g] = 1; redo_ready[g] = 1;
      wait (rst_n);
      @(negedge clk);
      repeat (S) @(negedge clk);
      for (int r = S; r < S + ROWS; r++)
        for (int x = 0; x < X; x++) begin
          for (int j = 0; j < KW; j++) begin
            comp_key_t k;
            logic off;
            k = '{in_addr: in_addr(C, r + j, x), w_addr: w_addr(C, j)};
            dec_valid[g] = 1; dec_key[g] = k; #1;
            if (dec_hit[g]) begin
              check(dec_result[g] == ref_dot(k.in_addr, k.w_addr, KW),
                    $sformatf("precomputed result SM %0d", g));
              n_hit_ok++;
              @(negedge clk); dec_valid[g] = 0;
              continue;
            end
            @(negedge clk); dec_valid[g] = 0;
            if (x == 0) begin
              miss(k, out_addr(g, r, x, j), off);
              if (off) begin
                expected[out_addr(g, r, x, j)] = ref_dot(k.in_addr, k.w_addr, KW);
                continue;
              end
              do_stall(STALL_MISS);
              if (r + j >= 3) evict(blk_of(in_addr(C, r + j - 3, 0)));
            end
            report(k, j);
          end
          do_stall(STALL_WIN);
        end
      done_cnt++;
    end
  end

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int p0, ins0, a0;
    logic off;
    cfg_intra_en = 1; cfg_inter_en = 1; cfg_vec_len = 6'(KW); cfg_w_stride = 32'd12;
    c_pred = 0; c_hit = 0; c_drop = 0; c_aw = 0; c_awfail = 0; c_aged = 0; c_ptrepl = 0;
    c_asg = 0; c_atom = 0; c_off = 0; c_atins = 0; c_atinv = 0; c_atrepl = 0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;

    // phase 1: the convolution sweep on all 56 SMs
    wait (done_cnt == N);
    // let every SM's assistant warp finish the work moved to it
    @(negedge clk);
    for (int g = 0; g < N; g++) sm_stall[g] = 1;
    repeat (600) @(negedge clk);
    for (int g = 0; g < N; g++) sm_stall[g] = 0;
    repeat (20) @(negedge clk);
    check(expected.size() == 0, $sformatf("all moved work accounted for (%0d left)", expected.size()));
    $display("sweep done at %0t: %0d precomputed results used, %0d moved, %0d atomic adds, %0d redos",
             $time, n_hit_ok, c_off, n_atom_ok, n_redo);

    // phase 2: overfill SM 0's Precompute Table (2 predictions per report)
    for (int i = 0; i < 150; i++) begin
      pr_valid[0] = 1; pr_key[0] = '{in_addr: 32'h0400_0000 + addr_t'(i) * 128, w_addr: w_addr(0, 2)};
      pr_w_row[0] = 5'd2;
      #1 while (!pr_ready[0]) begin @(negedge clk); #1; end
      @(negedge clk);
    end
    pr_valid[0] = 0;
    repeat (5) @(negedge clk);

    // phase 3: overfill cluster 0's Assign Table with misses of SM 1
    for (int i = 0; i < 520; i++) begin
      miss_valid[1] = 1;
      miss_msg[1] = '{key: '{in_addr: 32'h0500_0000 + addr_t'(i) * 128, w_addr: w_addr(0, 0)},
                      out_addr: '0, w_row: '0};
      #1 while (!miss_ready[1]) begin @(negedge clk); #1; end
      check(!miss_offloaded[1], "fresh pair not moved");
      @(negedge clk);
    end
    miss_valid[1] = 0;

    // phase 4: a prediction decoded before it was computed is dropped
    p0 = c_drop;
    pr_valid[9] = 1; pr_key[9] = '{in_addr: 32'h0600_0000, w_addr: w_addr(1, 1)}; pr_w_row[9] = 5'd1;
    @(negedge clk); pr_valid[9] = 0;
    repeat (3) @(negedge clk);
    dec_valid[9] = 1; dec_key[9] = '{in_addr: 32'h0600_0000, w_addr: w_addr(1, 0)}; #1;
    check(!dec_hit[9], "uncomputed prediction gives no result");
    @(negedge clk); dec_valid[9] = 0;
    check(c_drop == p0 + 1, "uncomputed prediction dropped");

    // phase 5: mode switches. SM 14 (cluster 2) creates a pair, SM 15 misses on it.
    cfg_inter_en = 0;
    miss_valid[14] = 1; miss_msg[14] = '{key: '{in_addr: 32'h0700_0000, w_addr: w_addr(2, 0)}, out_addr: 32'h0D00_0000, w_row: '0};
    @(negedge clk); miss_valid[14] = 0;
    a0 = c_atins;
    @(negedge clk);
    check(c_atins == a0, "no Assign Table entry with the inter-SM scheme off");
    cfg_inter_en = 1;
    miss_valid[14] = 1; @(negedge clk); miss_valid[14] = 0;
    miss_valid[15] = 1; miss_msg[15] = '{key: '{in_addr: 32'h0700_0004, w_addr: w_addr(2, 0)}, out_addr: 32'h0D00_0004, w_row: '0};
    #1 check(miss_ready[15] && miss_offloaded[15], "moved with the inter-SM scheme on");
    expected[32'h0D00_0004] = ref_dot(32'h0700_0004, w_addr(2, 0), KW);
    @(negedge clk); miss_valid[15] = 0;
    cfg_intra_en = 0;
    ins0 = c_pred;
    pr_valid[20] = 1; pr_key[20] = '{in_addr: 32'h0700_1000, w_addr: w_addr(2, 2)}; pr_w_row[20] = 5'd2;
    @(negedge clk); pr_valid[20] = 0;
    repeat (5) @(negedge clk);
    check(c_pred == ins0, "no predictions with the intra-SM scheme off");
    cfg_intra_en = 1;
    sm_stall[14] = 1; repeat (40) @(negedge clk); sm_stall[14] = 0;
    repeat (5) @(negedge clk);
    check(expected.size() == 0, "work moved after the mode switch done");

    // phase 6: idle; entries left over are aged out
    repeat (5 * 1024 + 50) @(negedge clk);

    check(c_pred > 0,   $sformatf("predictions inserted: %0d", c_pred));
    check(c_hit > 0 && n_hit_ok == c_hit - 0, $sformatf("precomputed results used: %0d", c_hit));
    check(c_drop > 0,   $sformatf("incomplete entries dropped: %0d", c_drop));
    check(c_aw > 0,     $sformatf("assistant warps: %0d", c_aw));
    check(c_awfail > 0, $sformatf("assistant warps without data: %0d", c_awfail));
    check(c_aged > 0,   $sformatf("ageing removals: %0d", c_aged));
    check(c_ptrepl > 0, $sformatf("Precompute Table replacements: %0d", c_ptrepl));
    check(c_asg > 0,    $sformatf("assigned computations accepted: %0d", c_asg));
    check(c_atom > 0,   $sformatf("atomic adds: %0d", c_atom));
    check(c_off > 0,    $sformatf("computations moved: %0d", c_off));
    check(c_atins > 0,  $sformatf("Assign Table entries made: %0d", c_atins));
    check(c_atinv > 0,  $sformatf("Assign Table invalidations: %0d", c_atinv));
    check(c_atrepl > 0, $sformatf("Assign Table replacements: %0d", c_atrepl));
    check(n_redo > 0,   $sformatf("moved work redone by the holder's core: %0d", n_redo));
    $display("counts: pred=%0d hit=%0d drop=%0d aw=%0d awfail=%0d aged=%0d ptrepl=%0d asg=%0d atom=%0d off=%0d atins=%0d atinv=%0d atrepl=%0d redo=%0d",
             c_pred, c_hit, c_drop, c_aw, c_awfail, c_aged, c_ptrepl, c_asg, c_atom, c_off, c_atins, c_atinv, c_atrepl, n_redo);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
