// tb_conv_workloads: the evaluated convolution layer shapes on one cluster
// at full table sizes (7 SMs, 256-entry Precompute Tables, 512-entry Assign
// Table). The filter widths of the evaluated networks are run one after the
// other, with a reset in between: 5x5 (LeNet-5 convolutions, AlexNet conv2),
// 11x11 (AlexNet conv1) and 3x3 (AlexNet conv3/conv4). Each SM sweeps
// ROWS output rows of X windows, rows starting at its SM id so that
// neighbouring SMs share input rows; the first column of each output row
// misses in the L1. Every precomputed result used at decode is compared with
// a dot product computed here, every computation moved to another SM must come
// back once, as an atomic add or, where a weight row crosses a cache block
// (contiguous 11-word rows do), as a redo on the holder; and each layer must use precomputed results
// and move work at least once. The number of products served from the
// Precompute Table is printed per layer.
module tb_conv_workloads;
  import oc_pkg::*;
  import tb_pkg::*;

  localparam int N = 7;
  localparam int ROWS = 2, X = 4;
  localparam int STALL_MISS = 30, STALL_WIN = 40;

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

  oc_cluster dut (.*);

  for (genvar s = 0; s < N; s++) begin : g_l1
    l1_model #(.LAT(2)) u_l1 (
      .clk, .rst_n, .miss_mask(64'd0),
      .req_valid(l1_req_valid[s]), .req_blk(l1_req_blk[s]), .req_ready(l1_req_ready[s]),
      .resp_valid(l1_resp_valid[s]), .resp_hit(l1_resp_hit[s]), .resp_data(l1_resp_data[s]));
  end

  int checks = 0, failures = 0;
  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  int KW;                       // filter size of the current layer
  word_t expected [addr_t];
  int n_hit, n_off, n_comp, done_cnt, n_redo;

  always @(posedge clk) if (rst_n) begin
    for (int s = 0; s < N; s++) begin
      if (atom_valid[s]) begin
        check(expected.exists(atom[s].addr) && expected[atom[s].addr] == atom[s].data,
              "atomic add of moved work");
        if (expected.exists(atom[s].addr)) expected.delete(atom[s].addr);
      end
      if (redo_valid[s]) begin
        // moved work whose weight row crosses a block: the holder's core does it
        check(expected.exists(redo_msg[s].out_addr), "redo of moved work");
        if (expected.exists(redo_msg[s].out_addr)) expected.delete(redo_msg[s].out_addr);
        n_redo++;
      end
    end
  end

  function automatic addr_t in_addr(int row, int x);
    return 32'h0100_0000 + addr_t'(row) * 32'h1000 + addr_t'(x) * 4;
  endfunction
  function automatic addr_t w_addr(int j);
    return 32'h0800_0000 + addr_t'(j) * addr_t'(KW) * 4;
  endfunction

  event go;

  for (genvar g = 0; g < N; g++) begin : g_sm
    task automatic do_stall(input int n);
      sm_stall[g] = 1;
      repeat (n) @(negedge clk);
      sm_stall[g] = 0;
    endtask

    initial begin
      dec_valid[g] = 0; dec_key[g] = '0; pr_valid[g] = 0; pr_key[g] = '0; pr_w_row[g] = '0;
      miss_valid[g] = 0; miss_msg[g] = '0; evict_valid[g] = 0; evict_blk[g] = '0;
      sm_stall[g] = 0; atom_ready[g] = 1; redo_ready[g] = 1;
      forever begin
        @(go);
        @(negedge clk);
        repeat (g) @(negedge clk);
        for (int r = g; r < g + ROWS; r++)
          for (int x = 0; x < X; x++) begin
            for (int j = 0; j < KW; j++) begin
              comp_key_t k;
              addr_t oa;
              k = '{in_addr: in_addr(r + j, x), w_addr: w_addr(j)};
              oa = 32'h0C00_0000 + addr_t'((((g * 64 + r) * 32 + x) * 16 + j) * 4);
              n_comp++;
              dec_valid[g] = 1; dec_key[g] = k; #1;
              if (dec_hit[g]) begin
                check(dec_result[g] == ref_dot(k.in_addr, k.w_addr, KW), "precomputed result");
                n_hit++;
                @(negedge clk); dec_valid[g] = 0;
                continue;
              end
              @(negedge clk); dec_valid[g] = 0;
              if (x == 0) begin
                logic off;
                miss_valid[g] = 1; miss_msg[g] = '{key: k, out_addr: oa, w_row: ROW_W'(j)};
                #1 while (!miss_ready[g]) begin @(negedge clk); #1; end
                off = miss_offloaded[g];
                @(negedge clk); miss_valid[g] = 0;
                if (off) begin
                  expected[oa] = ref_dot(k.in_addr, k.w_addr, KW);
                  n_off++;
                  continue;
                end
                do_stall(STALL_MISS);
              end
              pr_valid[g] = 1; pr_key[g] = k; pr_w_row[g] = ROW_W'(j);
              #1 while (!pr_ready[g]) begin @(negedge clk); #1; end
              @(negedge clk); pr_valid[g] = 0;
            end
            do_stall(STALL_WIN + 4 * KW);
          end
        done_cnt++;
      end
    end
  end

  initial begin
    #20000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic layer(input string name, input int k);
    rst_n = 0;
    KW = k;
    cfg_vec_len = VLEN_W'(k); cfg_w_stride = addr_t'(k * 4);
    n_hit = 0; n_off = 0; n_comp = 0; done_cnt = 0; n_redo = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    -> go;
    wait (done_cnt == N);
    @(negedge clk);
    for (int s = 0; s < N; s++) sm_stall[s] = 1;
    repeat (40 * k * k) @(negedge clk);
    for (int s = 0; s < N; s++) sm_stall[s] = 0;
    repeat (10) @(negedge clk);
    check(expected.size() == 0, {name, ": every moved computation returned"});
    check(n_hit > 0, {name, ": precomputed results used"});
    check(n_off > 0, {name, ": computations moved between SMs"});
    $display("%s (%0dx%0d): %0d vector computations, %0d from the Precompute Table, %0d moved, %0d of them redone",
             name, k, k, n_comp, n_hit, n_off, n_redo);
  endtask

  initial begin
    cfg_intra_en = 1; cfg_inter_en = 1; cfg_vec_len = 6'd3; cfg_w_stride = 32'd12; KW = 3;
    layer("LeNet-5 conv / AlexNet conv2", 5);
    layer("AlexNet conv1", 11);
    layer("AlexNet conv3/conv4", 3);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
