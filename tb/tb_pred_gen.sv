// tb_pred_gen: self-checking test of the prediction logic.
// Replays the 3x3 example (input rows at 0x00000/0x01000/0x02000, weight rows
// 12 bytes apart): the weight vectors of rows 0, 1 and 2 must give 0, 1 and 2
// predictions, pairing the same input vector with the weight rows above.
// Then random requests with random back-pressure check every address pair,
// their order and the one-cycle timing of the stream.
module tb_pred_gen;
  import oc_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  addr_t cfg_w_stride;
  logic req_valid, req_ready, out_valid, out_ready;
  comp_key_t req_key, out_key;
  logic [ROW_W-1:0] req_w_row;

  pred_gen dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  // expected stream kept by the test
  comp_key_t exp_q [$];
  int n_out = 0;

  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    check(exp_q.size() > 0, "unexpected prediction");
    if (exp_q.size() > 0) begin
      check(out_key == exp_q[0], $sformatf("prediction %0d: got %h/%h want %h/%h", n_out,
            out_key.in_addr, out_key.w_addr, exp_q[0].in_addr, exp_q[0].w_addr));
      void'(exp_q.pop_front());
    end
    n_out++;
  end

  task automatic request(input addr_t ia, input addr_t wa, input int row, input addr_t stride);
    @(negedge clk);
    while (!req_ready) @(negedge clk);
    cfg_w_stride = stride;
    req_valid = 1; req_key = '{in_addr: ia, w_addr: wa}; req_w_row = ROW_W'(row);
    for (int d = 1; d <= row; d++) exp_q.push_back('{in_addr: ia, w_addr: wa - addr_t'(d) * stride});
    @(negedge clk);
    req_valid = 0;
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cyc;
    req_valid = 0; out_ready = 1; cfg_w_stride = 32'd12; req_key = '0; req_w_row = '0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    // the paper's example: weight rows at 0x8000, 0x800c, 0x8018
    request(32'h0000_0000, 32'h0000_8000, 0, 32'd12);
    request(32'h0000_1000, 32'h0000_800c, 1, 32'd12);
    request(32'h0000_2000, 32'h0000_8018, 2, 32'd12);
    repeat (4) @(negedge clk);
    check(n_out == 3, "3x3 window gives K(K-1)/2 = 3 predictions");
    check(exp_q.size() == 0, "all example predictions seen");
    // timing: a row-4 request streams 4 outputs in 4 consecutive cycles
    request(32'h0004_0000, 32'h0009_0000, 4, 32'd20);
    cyc = 0;
    while (exp_q.size() > 0 && cyc < 20) begin @(negedge clk); cyc++; end
    check(cyc == 4, $sformatf("one prediction per cycle (%0d)", cyc));
    // random requests under random back-pressure
    fork
      begin
        for (int i = 0; i < 60; i++)
          request($urandom, $urandom, int'($urandom_range(0, 10)), addr_t'($urandom_range(4, 4096)));
      end
      begin
        repeat (800) begin @(negedge clk); out_ready = ($urandom_range(0, 3) != 0); end
        out_ready = 1;
      end
    join
    repeat (20) @(negedge clk);
    check(exp_q.size() == 0, "every random prediction produced");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
