// tb_assistant_warp: self-checking test of the assistant warp.
// The test plays the Precompute Table (a queue of pending computations) and
// an L1 data cache (a small array of 128-byte blocks with a per-block hit
// flag, answering LAT cycles after a request). It checks the paper's
// example products ([3,0,1].[-1,0,1] = -2 and [2,4,2].[2,-2,0] = -4), random
// dot products of length 1..32 against a sum computed here, that no warp
// starts while the SM is not stalled, that a vector crossing a block or a
// block missing from the L1 ends with cmp_ok = 0, and the cycle count
// 2*(LAT+2) + ceil(len/8) + 2 cycles from take to write-back
// (each read: one request cycle, LAT cycles of L1 latency, one capture cycle).
module tb_assistant_warp;
  import oc_pkg::*;

  localparam int LAT = 3;
  localparam int NBLK = 16;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic sm_stall;
  logic [VLEN_W-1:0] cfg_vec_len;
  logic iss_valid, iss_take;
  logic [7:0] iss_idx, cmp_idx;
  comp_key_t iss_key;
  logic l1_req_valid, l1_req_ready, l1_resp_valid, l1_resp_hit;
  blk_addr_t l1_req_blk;
  block_t l1_resp_data;
  logic cmp_valid, cmp_ok, cmp_ready, busy;
  word_t cmp_result;

  assistant_warp #(.THREADS(32), .SIMT_WIDTH(8), .NREGS(3), .IDX_W(8)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  // ---------------- behavioural L1: blocks 0..NBLK-1 of the address space
  word_t mem [NBLK][BLOCK_WORDS];
  logic  present [NBLK];
  int    lat_cnt;
  blk_addr_t pend_blk;
  logic  pend;
  assign l1_req_ready = !pend;
  always @(posedge clk) begin
    if (!rst_n) begin pend <= 0; l1_resp_valid <= 0; lat_cnt <= 0; end
    else begin
      l1_resp_valid <= 0;
      if (l1_req_valid && l1_req_ready) begin pend <= 1; pend_blk <= l1_req_blk; lat_cnt <= LAT - 1; end
      else if (pend) begin
        if (lat_cnt == 0) begin
          pend <= 0;
          l1_resp_valid <= 1;
          l1_resp_hit <= (int'(pend_blk) < NBLK) && present[pend_blk[3:0]];
          for (int w = 0; w < BLOCK_WORDS; w++) l1_resp_data[w] <= mem[pend_blk[3:0]][w];
        end else lat_cnt <= lat_cnt - 1;
      end
    end
  end

  function automatic word_t rd(addr_t a);
    return mem[a[10:7]][a[6:2]];
  endfunction

  function automatic word_t dot(addr_t a, addr_t b, int len);
    word_t s = 0;
    for (int i = 0; i < len; i++) s += rd(a + addr_t'(4 * i)) * rd(b + addr_t'(4 * i));
    return s;
  endfunction

  // run one computation; returns ok, result and cycles from take to write-back
  task automatic run(input addr_t a, input addr_t b, input int len,
                     output logic ok, output word_t res, output int cyc);
    @(negedge clk);
    cfg_vec_len = VLEN_W'(len);
    iss_valid = 1; iss_key = '{in_addr: a, w_addr: b}; iss_idx = 8'(len);
    sm_stall = 1;
    #1 while (!iss_take) begin @(negedge clk); #1; end
    @(negedge clk);
    iss_valid = 0;
    cyc = 1;
    while (!cmp_valid) begin @(negedge clk); cyc++; end
    ok = cmp_ok; res = cmp_result;
    check(cmp_idx == 8'(len), "write-back names the taken entry");
    @(negedge clk);
  endtask

  initial begin
    #400000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic ok; word_t res; int cyc;
    sm_stall = 0; iss_valid = 0; iss_key = '0; iss_idx = '0; cfg_vec_len = 6'd3;
    cmp_ready = 1; l1_resp_hit = 0; l1_resp_data = '0;
    for (int b = 0; b < NBLK; b++) begin
      present[b] = 1;
      for (int w = 0; w < BLOCK_WORDS; w++) mem[b][w] = word_t'($urandom_range(0, 200)) - 32'd100;
    end
    // Fig. 3 rows: input block 0 row [3,2,0 ...], block 1 [3,0,1,...], block 2 [2,4,2,...]
    mem[1][0] = 3; mem[1][1] = 0; mem[1][2] = 1;
    mem[2][0] = 2; mem[2][1] = 4; mem[2][2] = 2;
    // weight rows in block 5: w0 = [-1,0,1] at word 0, w1 = [2,-2,0] at word 3
    mem[5][0] = -1; mem[5][1] = 0;  mem[5][2] = 1;
    mem[5][3] = 2;  mem[5][4] = -2; mem[5][5] = 0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;

    // no start without a stall
    iss_valid = 1; iss_key = '{in_addr: 32'h80, w_addr: 32'h280};
    repeat (5) begin @(negedge clk); check(!busy && !iss_take, "idle while SM not stalled"); end
    iss_valid = 0;

    run(32'h080, 32'h280, 3, ok, res, cyc);
    check(ok && res == -32'sd2, "example [3,0,1].[-1,0,1] = -2");
    check(cyc == 2 * (LAT + 2) + 1 + 2, $sformatf("latency len 3: %0d", cyc));
    run(32'h100, 32'h28c, 3, ok, res, cyc);
    check(ok && res == -32'sd4, "example [2,4,2].[2,-2,0] = -4");

    // random vectors, lengths 1..32, inside their blocks
    for (int i = 0; i < 60; i++) begin
      int len, oa, ob;
      addr_t a, b;
      len = $urandom_range(1, 32);
      oa = $urandom_range(0, 32 - len);
      ob = $urandom_range(0, 32 - len);
      a = {21'd0, 4'($urandom_range(0, NBLK - 1)), 5'(oa), 2'b00};
      b = {21'd0, 4'($urandom_range(0, NBLK - 1)), 5'(ob), 2'b00};
      run(a, b, len, ok, res, cyc);
      check(ok && res == dot(a, b, len), $sformatf("dot len %0d: %h vs %h", len, res, dot(a, b, len)));
      check(cyc == 2 * (LAT + 2) + (len + 7) / 8 + 2, $sformatf("latency len %0d: %0d", len, cyc));
    end

    // vector crossing the end of its block
    run(32'h0f4, 32'h200, 5, ok, res, cyc);
    check(!ok, "vector crossing a block is refused");
    // operand no longer cached
    present[7] = 0;
    run(32'h380, 32'h200, 3, ok, res, cyc);
    check(!ok, "missing input block ends with cmp_ok = 0");
    run(32'h200, 32'h390, 3, ok, res, cyc);
    check(!ok, "missing weight block ends with cmp_ok = 0");
    present[7] = 1;

    // write-back is held until accepted
    cmp_ready = 0;
    fork
      run(32'h100, 32'h28c, 3, ok, res, cyc);
      begin
        repeat (30) @(negedge clk);
        check(cmp_valid && busy, "write-back held while not ready");
        cmp_ready = 1;
      end
    join
    check(ok && res == -32'sd4, "result kept while held");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
