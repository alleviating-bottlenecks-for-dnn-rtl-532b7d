// tb_assign_table: self-checking test of the Computation Assignment Table.
// An 8-entry table is compared against a reference model kept in the test (a
// list of (A, B) -> SM mappings with the same free-slot / circular
// replacement rule): random lookups, inserts and block invalidations, plus
// directed cases for overwriting a pair and removing every entry that holds a
// replaced block as A or as B.
module tb_assign_table;
  import oc_pkg::*;

  localparam int N = 8;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  blk_addr_t lk_a, lk_b, ins_a, ins_b, inv_blk;
  logic lk_hit, ins_valid, inv_valid, ev_replaced, ev_invalidated;
  sm_id_t lk_sm, ins_sm;

  assign_table #(.ENTRIES(N)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  // reference model
  logic      r_v [N];
  blk_addr_t r_a [N], r_b [N];
  sm_id_t    r_s [N];
  int        r_ptr;

  function automatic int r_find(blk_addr_t a, blk_addr_t b);
    for (int i = 0; i < N; i++) if (r_v[i] && r_a[i] == a && r_b[i] == b) return i;
    return -1;
  endfunction

  task automatic r_step(input logic iv, input blk_addr_t ib, input logic wv,
                        input blk_addr_t wa, input blk_addr_t wb, input sm_id_t ws);
    logic hitinv [N];
    int f, fr;
    for (int i = 0; i < N; i++) hitinv[i] = iv && r_v[i] && (r_a[i] == ib || r_b[i] == ib);
    f = r_find(wa, wb);
    if (f >= 0 && hitinv[f]) f = -1;
    fr = -1;
    for (int i = N - 1; i >= 0; i--) if (!r_v[i] || hitinv[i]) fr = i;
    for (int i = 0; i < N; i++) if (hitinv[i]) r_v[i] = 0;
    if (wv) begin
      int w;
      if (f >= 0) w = f;
      else if (fr >= 0) w = fr;
      else begin w = r_ptr; r_ptr = (r_ptr + 1) % N; end
      r_v[w] = 1; r_a[w] = wa; r_b[w] = wb; r_s[w] = ws;
    end
  endtask

  // one cycle: lookup checked against the model, then optional insert/invalidate
  task automatic cyc(input blk_addr_t la, input blk_addr_t lb,
                     input logic wv, input blk_addr_t wa, input blk_addr_t wb, input sm_id_t ws,
                     input logic iv, input blk_addr_t ib);
    int f;
    @(negedge clk);
    lk_a = la; lk_b = lb;
    ins_valid = wv; ins_a = wa; ins_b = wb; ins_sm = ws;
    inv_valid = iv; inv_blk = ib;
    #1;
    f = r_find(la, lb);
    check(lk_hit == (f >= 0), $sformatf("lookup hit %h/%h", la, lb));
    if (f >= 0) check(lk_sm == r_s[f], "lookup SM id");
    r_step(iv, ib, wv, wa, wb, ws);
    @(posedge clk);
  endtask

  initial begin
    #500000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < N; i++) r_v[i] = 0;
    r_ptr = 0;
    lk_a = '0; lk_b = '0; ins_valid = 0; ins_a = '0; ins_b = '0; ins_sm = '0;
    inv_valid = 0; inv_blk = '0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;

    // directed: (A,B) -> SM 3, then SM 5
    cyc(25'h10, 25'h20, 1, 25'h10, 25'h20, 3'd3, 0, '0);
    cyc(25'h10, 25'h20, 0, '0, '0, '0, 0, '0);
    check(lk_hit && lk_sm == 3'd3, "entry (A,B)->3 created");
    cyc(25'h10, 25'h20, 1, 25'h10, 25'h20, 3'd5, 0, '0);
    cyc(25'h10, 25'h20, 0, '0, '0, '0, 0, '0);
    check(lk_hit && lk_sm == 3'd5, "pair overwritten, not duplicated");
    // block 0x20 held as B by one entry and as A by another: both removed
    cyc(25'h20, 25'h30, 1, 25'h20, 25'h30, 3'd1, 0, '0);
    cyc(25'h40, 25'h50, 1, 25'h40, 25'h50, 3'd2, 0, '0);
    cyc(25'h40, 25'h50, 0, '0, '0, '0, 1, 25'h20);
    check(ev_invalidated, "replacement strobe");
    cyc(25'h10, 25'h20, 0, '0, '0, '0, 0, '0);
    check(!lk_hit, "entry with block as B removed");
    cyc(25'h20, 25'h30, 0, '0, '0, '0, 0, '0);
    check(!lk_hit, "entry with block as A removed");
    cyc(25'h40, 25'h50, 0, '0, '0, '0, 0, '0);
    check(lk_hit && lk_sm == 3'd2, "unrelated entry kept");

    // random traffic over a small address range so that hits, overwrites,
    // invalidations and replacements all happen
    for (int i = 0; i < 3000; i++) begin
      cyc(25'($urandom_range(0, 5)), 25'($urandom_range(6, 11)),
          ($urandom_range(0, 2) == 0), 25'($urandom_range(0, 5)), 25'($urandom_range(6, 11)),
          3'($urandom_range(0, 6)),
          ($urandom_range(0, 6) == 0), 25'($urandom_range(0, 11)));
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
