// tb_precompute_table: self-checking test of the Precompute Table.
// A small table (8 entries, ageing every 16 cycles) is driven through its
// ports: decode lookups (complete, incomplete, absent), predicted inserts and
// duplicates, hand-out to and write-back from an assistant warp, assigned
// inserts answered at once, merged into a pending entry or newly allocated,
// dropped computations and the redo of assigned ones, replacement in a full table and periodic ageing.
// Expected values are worked out by the test itself.
module tb_precompute_table;
  import oc_pkg::*;

  localparam int N = 8;
  localparam int AP = 16;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic lk_valid, lk_hit, lk_complete;
  comp_key_t lk_key;
  word_t lk_result;
  logic ins_valid, ins_assigned, ins_ready, ins_done;
  comp_key_t ins_key;
  addr_t ins_out_addr;
  word_t ins_done_result;
  logic iss_valid, iss_take;
  logic [2:0] iss_idx, cmp_idx;
  comp_key_t iss_key;
  logic cmp_valid, cmp_ok, cmp_atom_valid, ev_aged_out, ev_replaced;
  word_t cmp_result;
  atom_t cmp_atom;
  logic cmp_redo_valid;
  fwd_msg_t cmp_redo;
  logic rv;
  fwd_msg_t rm;

  precompute_table #(.ENTRIES(N), .AGE_PERIOD(AP), .MAX_AGE(3)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic comp_key_t K(int n);
    return '{in_addr: 32'h1000_0000 + 32'(n) * 4, w_addr: 32'h2000_0000 + 32'(n) * 64};
  endfunction

  task automatic idle();
    lk_valid = 0; ins_valid = 0; ins_assigned = 0; ins_out_addr = '0;
    iss_take = 0; cmp_valid = 0; cmp_ok = 0; cmp_result = '0; cmp_idx = '0;
    lk_key = '0; ins_key = '0;
  endtask

  task automatic step();
    @(posedge clk); #1; idle();
  endtask

  task automatic insert(input comp_key_t k, input logic asg, input addr_t oa);
    ins_valid = 1; ins_key = k; ins_assigned = asg; ins_out_addr = oa; #1;
    step();
  endtask

  // lookup, returns hit/complete/result seen in that cycle
  task automatic lookup(input comp_key_t k, output logic h, output logic c, output word_t r);
    lk_valid = 1; lk_key = k; #1;
    h = lk_hit; c = lk_complete; r = lk_result;
    step();
  endtask

  // take the pending entry and write back a result
  task automatic compute(input comp_key_t exp_k, input word_t res, input logic ok,
                         output logic atom_v, output atom_t atom_o);
    logic [2:0] idx;
    #1;
    check(iss_valid, "pending entry offered");
    check(iss_key == exp_k, "pending key");
    idx = iss_idx;
    iss_take = 1; #1; step();
    cmp_valid = 1; cmp_idx = idx; cmp_ok = ok; cmp_result = res; #1;
    atom_v = cmp_atom_valid; atom_o = cmp_atom;
    rv = cmp_redo_valid; rm = cmp_redo;
    step();
  endtask

  logic h, c, av;
  word_t r;
  atom_t ao;
  int t0, seen_aged;

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    idle();
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    step();

    // 1. absent key
    lookup(K(1), h, c, r);
    check(!h, "empty table misses");
    // 2. predicted entry, decoded before it is computed: dropped
    insert(K(1), 0, '0);
    lookup(K(1), h, c, r);
    check(h && !c, "incomplete entry hit");
    lookup(K(1), h, c, r);
    check(!h, "incomplete entry was invalidated");
    check(!iss_valid, "nothing pending after drop");
    // 3. predicted, computed, then used once
    insert(K(2), 0, '0);
    compute(K(2), 32'd42, 1, av, ao);
    check(!av, "local result makes no atomic add");
    lookup(K(2), h, c, r);
    check(h && c && r == 32'd42, "complete entry returns its result");
    lookup(K(2), h, c, r);
    check(!h, "used result is removed");
    // 4. duplicate prediction is ignored
    insert(K(3), 0, '0);
    insert(K(3), 0, '0);
    compute(K(3), 32'd5, 1, av, ao);
    #1 check(!iss_valid, "duplicate prediction not stored twice");
    lookup(K(3), h, c, r);
    check(h && c && r == 32'd5, "K3 result");
    // 5. assigned work whose result is already there
    insert(K(4), 0, '0);
    compute(K(4), 32'hffff_fff9, 1, av, ao);
    ins_valid = 1; ins_key = K(4); ins_assigned = 1; ins_out_addr = 32'h0000_0100; #1;
    check(ins_ready && ins_done && ins_done_result == 32'hffff_fff9, "assigned insert answered at once");
    step();
    lookup(K(4), h, c, r);
    check(!h, "answered entry freed");
    // 6. assigned work merged into a pending prediction
    insert(K(5), 0, '0);
    ins_valid = 1; ins_key = K(5); ins_assigned = 1; ins_out_addr = 32'h0000_0200; #1;
    check(!ins_done, "pending entry gives no answer");
    step();
    compute(K(5), 32'd9, 1, av, ao);
    check(av && ao.addr == 32'h200 && ao.data == 32'd9, "assigned result leaves as atomic add");
    lookup(K(5), h, c, r);
    check(!h, "finished assigned entry freed");
    // 7. new assigned entry, invisible to local decode until computed
    insert(K(6), 1, 32'h300);
    lookup(K(6), h, c, r);
    check(!h, "assigned entry not matched by local decode");
    compute(K(6), 32'd11, 1, av, ao);
    check(av && ao.addr == 32'h300 && ao.data == 32'd11, "new assigned entry computed");
    // 8. operand gone: entry dropped
    insert(K(7), 0, '0);
    compute(K(7), 32'd1, 0, av, ao);
    lookup(K(7), h, c, r);
    check(!h, "failed computation dropped");
    check(!rv, "failed local computation is not redone");
    // 8b. assigned work without operands goes back to the core
    insert(K(8), 1, 32'h400);
    compute(K(8), 32'd1, 0, av, ao);
    check(!av && rv && rm.key == K(8) && rm.out_addr == 32'h400, "assigned work without data is redone");
    // 9. full table: the next insert replaces an entry
    for (int i = 0; i < N; i++) insert(K(10 + i), 0, '0);
    ins_valid = 1; ins_key = K(30); ins_assigned = 0; #1;
    check(ins_ready && ev_replaced, "full table replaces");
    step();
    begin
      int present;
      present = 0;
      for (int i = 0; i < N; i++) begin
        lookup(K(10 + i), h, c, r);
        if (h) present++;
      end
      check(present == N - 1, "exactly one old entry replaced");
    end
    lookup(K(30), h, c, r);
    check(h, "new entry present after replacement");
    // 10. ageing: an entry disappears after MAX_AGE+1 ticks, not before 3
    repeat (5 * AP) step();
    insert(K(40), 0, '0);
    t0 = 0; seen_aged = 0;
    repeat (2 * AP) begin step(); t0++; end
    // still there after two periods (peek without consuming: check pending)
    #1 check(iss_valid && iss_key == K(40), "young entry kept");
    repeat (4 * AP) begin
      if (ev_aged_out) seen_aged++;
      step();
    end
    #1 check(!iss_valid, "old entry removed by ageing");
    check(seen_aged > 0, "ageing strobe seen");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
