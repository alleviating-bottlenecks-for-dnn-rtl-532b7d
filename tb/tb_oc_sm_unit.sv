// tb_oc_sm_unit: self-checking test of one SM's opportunistic computing unit.
// Replays the 3x3 example: three input rows in L1 blocks 0, 1, 2 and the three
// weight rows in block 5 (12 bytes apart). The core reports the computations
// of the first window; the unit must predict (row1 x w0), (row2 x w1) and
// (row2 x w0), compute them while the SM is stalled, and return -2, -4 and 0
// at decode. It then checks computations assigned by another SM (answered at
// once when already computed, computed during a stall otherwise, both leaving
// as atomic adds), that a decode of an uncomputed prediction drops it, that
// no assistant warp runs without a stall, and that with prediction switched
// off nothing is predicted. Results are computed by the test from its L1 copy.
module tb_oc_sm_unit;
  import oc_pkg::*;

  localparam int LAT = 2;
  localparam int NBLK = 16;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic cfg_intra_en;
  logic [VLEN_W-1:0] cfg_vec_len;
  addr_t cfg_w_stride;
  logic dec_valid, dec_hit;
  comp_key_t dec_key, pr_key;
  word_t dec_result;
  logic pr_valid, pr_ready;
  logic [ROW_W-1:0] pr_w_row;
  logic inbox_valid, inbox_ready;
  fwd_msg_t inbox_msg;
  logic sm_stall;
  logic l1_req_valid, l1_req_ready, l1_resp_valid, l1_resp_hit;
  blk_addr_t l1_req_blk;
  block_t l1_resp_data;
  logic atom_valid, atom_ready;
  atom_t atom;
  logic redo_valid, redo_ready;
  fwd_msg_t redo_msg;
  sm_events_t ev;

  oc_sm_unit #(.PT_ENTRIES(16), .AGE_PERIOD(4096), .MAX_AGE(3)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  // ---------------- behavioural L1
  word_t mem [NBLK][BLOCK_WORDS];
  int lat_cnt; logic pend; blk_addr_t pend_blk;
  assign l1_req_ready = !pend;
  always @(posedge clk) begin
    if (!rst_n) begin pend <= 0; l1_resp_valid <= 0; lat_cnt <= 0; l1_resp_hit <= 0; end
    else begin
      l1_resp_valid <= 0;
      if (l1_req_valid && l1_req_ready) begin pend <= 1; pend_blk <= l1_req_blk; lat_cnt <= LAT - 1; end
      else if (pend) begin
        if (lat_cnt == 0) begin
          pend <= 0; l1_resp_valid <= 1; l1_resp_hit <= int'(pend_blk) < NBLK;
          for (int w = 0; w < BLOCK_WORDS; w++) l1_resp_data[w] <= mem[pend_blk[3:0]][w];
        end else lat_cnt <= lat_cnt - 1;
      end
    end
  end
  function automatic word_t rd(addr_t a); return mem[a[10:7]][a[6:2]]; endfunction
  function automatic word_t dot(addr_t a, addr_t b);
    word_t s = 0;
    for (int i = 0; i < 3; i++) s += rd(a + addr_t'(4 * i)) * rd(b + addr_t'(4 * i));
    return s;
  endfunction

  // ---------------- atomic adds collected by the test
  atom_t atoms [$];
  assign atom_ready = 1'b1;
  assign redo_ready = 1'b1;
  always @(posedge clk) if (rst_n && atom_valid) atoms.push_back(atom);

  // ---------------- event counters
  int n_pred, n_start, n_drop, n_hit;
  always @(posedge clk) if (rst_n) begin
    n_pred  += int'(ev.pred_insert);
    n_start += int'(ev.aw_start);
    n_drop  += int'(ev.dec_drop);
    n_hit   += int'(ev.dec_hit);
  end

  localparam addr_t IN0 = 32'h000, IN1 = 32'h080, IN2 = 32'h100;
  localparam addr_t W0 = 32'h280, W1 = 32'h28c, W2 = 32'h298;

  task automatic report(input addr_t ia, input addr_t wa, input int row);
    @(negedge clk);
    pr_valid = 1; pr_key = '{in_addr: ia, w_addr: wa}; pr_w_row = ROW_W'(row);
    #1 while (!pr_ready) begin @(negedge clk); #1; end
    @(negedge clk); pr_valid = 0;
  endtask

  task automatic decode(input addr_t ia, input addr_t wa, output logic h, output word_t r);
    @(negedge clk);
    dec_valid = 1; dec_key = '{in_addr: ia, w_addr: wa}; #1;
    h = dec_hit; r = dec_result;
    @(negedge clk); dec_valid = 0;
  endtask

  task automatic assign_in(input addr_t ia, input addr_t wa, input addr_t oa, input int row);
    @(negedge clk);
    inbox_valid = 1; inbox_msg = '{key: '{in_addr: ia, w_addr: wa}, out_addr: oa, w_row: ROW_W'(row)};
    #1 while (!inbox_ready) begin @(negedge clk); #1; end
    @(negedge clk); inbox_valid = 0;
  endtask

  task automatic stall(input int n);
    @(negedge clk); sm_stall = 1;
    repeat (n) @(negedge clk);
    sm_stall = 0;
    while (dut.aw_busy) @(negedge clk);
  endtask

  initial begin
    #400000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic h; word_t r; int p0;
    cfg_intra_en = 1; cfg_vec_len = 6'd3; cfg_w_stride = 32'd12;
    dec_valid = 0; dec_key = '0; pr_valid = 0; pr_key = '0; pr_w_row = '0;
    inbox_valid = 0; inbox_msg = '0; sm_stall = 0;
    n_pred = 0; n_start = 0; n_drop = 0; n_hit = 0;
    for (int b = 0; b < NBLK; b++)
      for (int w = 0; w < BLOCK_WORDS; w++) mem[b][w] = word_t'($urandom_range(0, 20)) - 32'd10;
    mem[0][0] = 3; mem[0][1] = 2; mem[0][2] = 0;
    mem[1][0] = 3; mem[1][1] = 0; mem[1][2] = 1;
    mem[2][0] = 2; mem[2][1] = 4; mem[2][2] = 2;
    mem[5][0] = -1; mem[5][1] = 0;  mem[5][2] = 1;
    mem[5][3] = 2;  mem[5][4] = -2; mem[5][5] = 0;
    mem[5][6] = 0;  mem[5][7] = 1;  mem[5][8] = 2;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;

    // step 1 of the example: the first window is computed by the core
    report(IN0, W0, 0);
    report(IN1, W1, 1);
    report(IN2, W2, 2);
    repeat (5) @(negedge clk);
    check(n_pred == 3, $sformatf("3x3 window gives 3 predictions (%0d)", n_pred));
    repeat (20) @(negedge clk);
    check(n_start == 0, "no assistant warp without a stall");
    // a stall of dozens of cycles runs several assistant warps
    stall(60);
    check(n_start == 3, $sformatf("three assistant warps in one stall (%0d)", n_start));
    // step 5: the window one row down finds the partial results
    decode(IN1, W0, h, r);
    check(h && r == -32'sd2, "[3,0,1].[-1,0,1] = -2 precomputed");
    decode(IN2, W1, h, r);
    check(h && r == -32'sd4, "[2,4,2].[2,-2,0] = -4 precomputed");
    decode(IN2, W0, h, r);
    check(h && r == 32'd0, "[2,4,2].[-1,0,1] = 0 precomputed");
    decode(IN2, W0, h, r);
    check(!h, "a result is used once");

    // decode of a prediction not yet computed drops it
    report(32'h180, 32'h28c, 1);
    repeat (3) @(negedge clk);
    decode(32'h180, 32'h280, h, r);
    check(!h && n_drop == 1, "incomplete entry dropped at decode");

    // work assigned by another SM: new entry computed in a stall, and its own
    // predictions (w_row 2 gives two more) are computed as well
    p0 = n_pred;
    assign_in(32'h300, 32'h298, 32'h0001_0000, 2);
    repeat (5) @(negedge clk);
    check(n_pred == p0 + 2, "assigned computation also predicts");
    stall(80);
    check(atoms.size() == 1, "assigned result sent as atomic add");
    if (atoms.size() > 0)
      check(atoms[0].addr == 32'h0001_0000 && atoms[0].data == dot(32'h300, 32'h298),
            "atomic add address and product");
    // assigned work whose prediction is already complete: answered at once
    assign_in(32'h300, 32'h28c, 32'h0002_0000, 1);
    repeat (3) @(negedge clk);
    check(atoms.size() == 2, "already computed assigned work answered at once");
    if (atoms.size() > 1)
      check(atoms[1].addr == 32'h0002_0000 && atoms[1].data == dot(32'h300, 32'h28c),
            "immediate answer carries the precomputed product");
    decode(32'h300, 32'h280, h, r);
    check(h && r == dot(32'h300, 32'h280), "remaining prediction of assigned work usable locally");

    // prediction switched off
    cfg_intra_en = 0;
    p0 = n_pred;
    report(IN2, W2, 2);
    repeat (5) @(negedge clk);
    check(n_pred == p0, "no predictions when intra-SM scheme is off");
    check(n_hit == 4, $sformatf("decode hits counted (%0d)", n_hit));

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
