// assistant_warp: executes predicted and assigned computations while the SM
// is stalled.
//
// One assistant warp exists at a time. When sm_stall is high (no normal warp
// can issue) and the Precompute Table offers a pending entry, the warp takes
// it and computes the dot product of the input vector and the weight vector
// it names, both cfg_vec_len words long:
//   1. read the L1 block holding the input vector; thread t loads word t of the
//      vector into its register R0 (threads t >= cfg_vec_len are inactive);
//   2. read the weight vector's block the same way into R1;
//   3. R2 = R0 * R1, SIMT_WIDTH threads per cycle, in lockstep;
//   4. add R2 over the active threads and write the sum back to the table.
// The register context is NREGS registers of 32 bits for each of THREADS
// threads: 3*4*32 = 384 bytes, the paper's figure, and SIMT_WIDTH = 8 is the
// paper's SM width. The paper runs the assistant warp's instructions on the
// SM's own SIMT lanes; here the lanes are SIMT_WIDTH multipliers of this
// block, and the instruction sequence is fixed in its state machine.
//
// Arithmetic is 32-bit two's complement integer (products and sum kept to 32
// bits); the paper's example uses integers and it does not state the data
// type. A vector must lie inside one 128-byte block (word offset + length
// <= 32) and the L1 must still hold both blocks; otherwise the warp reports
// cmp_ok = 0 and the entry is dropped, since an assistant warp never stalls
// on a miss.
//
// Timing: in the cycle after the take the first L1 request is raised; each
// of the two reads costs one request cycle, the L1's latency and one cycle to
// capture the block; then ceil(len/SIMT_WIDTH) multiply cycles and one
// reduction cycle follow, and cmp_valid is held until cmp_ready. With an L1
// latency of L that is 2*(L+2) + ceil(len/8) + 2 cycles from take to result.
// The warp runs to its end once started, whatever sm_stall does.
module assistant_warp
  import oc_pkg::*;
#(
  parameter int unsigned THREADS    = 32,
  parameter int unsigned SIMT_WIDTH = 8,
  parameter int unsigned NREGS      = 3,
  parameter int unsigned IDX_W      = 8
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              sm_stall,
  input  logic [VLEN_W-1:0] cfg_vec_len,
  // pending entries of the Precompute Table
  input  logic              iss_valid,
  input  logic [IDX_W-1:0]  iss_idx,
  input  comp_key_t         iss_key,
  output logic              iss_take,
  // L1 data cache read port (block granularity)
  output logic              l1_req_valid,
  output blk_addr_t         l1_req_blk,
  input  logic              l1_req_ready,
  input  logic              l1_resp_valid,
  input  logic              l1_resp_hit,
  input  block_t            l1_resp_data,
  // write-back to the Precompute Table
  output logic              cmp_valid,
  output logic [IDX_W-1:0]  cmp_idx,
  output logic              cmp_ok,
  output word_t             cmp_result,
  input  logic              cmp_ready,
  output logic              busy
);

  localparam int unsigned GROUPS = (THREADS + SIMT_WIDTH - 1) / SIMT_WIDTH;

  typedef enum logic [2:0] {S_IDLE, S_REQ_A, S_WAIT_A, S_REQ_B, S_WAIT_B,
                            S_MUL, S_RED, S_DONE} state_t;
  state_t state;

  // register context: R0 input element, R1 weight element, R2 product
  word_t regs [NREGS][THREADS];

  comp_key_t        key_q;
  logic [IDX_W-1:0] idx_q;
  logic [VLEN_W-1:0] len_q;
  logic             ok_q;
  word_t            sum_q;
  logic [$clog2(GROUPS+1)-1:0] grp;

  // a vector fits if its word offset plus its length stays inside the block
  function automatic logic fits(addr_t a, logic [VLEN_W-1:0] len);
    return (len != '0) && ({1'b0, a[BLK_OFF_W-1:2]} + (VLEN_W)'(len) <= (VLEN_W)'(BLOCK_WORDS));
  endfunction

  assign busy         = (state != S_IDLE);
  assign iss_take     = (state == S_IDLE) && sm_stall && iss_valid;
  assign l1_req_valid = (state == S_REQ_A) || (state == S_REQ_B);
  assign l1_req_blk   = (state == S_REQ_B) ? blk_of(key_q.w_addr) : blk_of(key_q.in_addr);
  assign cmp_valid    = (state == S_DONE);
  assign cmp_idx      = idx_q;
  assign cmp_ok       = ok_q;
  assign cmp_result   = sum_q;

  // the active threads of the warp
  function automatic logic active(int t, logic [VLEN_W-1:0] len);
    return 32'(t) < 32'(len);
  endfunction

  // reduction over the active threads' R2
  word_t red_sum;
  always_comb begin
    red_sum = '0;
    for (int t = 0; t < THREADS; t++)
      if (active(t, len_q)) red_sum = red_sum + regs[2][t];
  end

  // vector load: thread t takes word (offset + t) of the returned block
  function automatic word_t pick(block_t blk, addr_t a, int t);
    int w;
    w = int'(a[BLK_OFF_W-1:2]) + t;
    return (w < int'(BLOCK_WORDS)) ? blk[w] : '0;
  endfunction

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state <= S_IDLE;
      key_q <= '0;
      idx_q <= '0;
      len_q <= '0;
      ok_q  <= 1'b0;
      sum_q <= '0;
      grp   <= '0;
      for (int r = 0; r < int'(NREGS); r++)
        for (int t = 0; t < int'(THREADS); t++) regs[r][t] <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (iss_take) begin
          key_q <= iss_key;
          idx_q <= iss_idx;
          len_q <= cfg_vec_len;
          ok_q  <= 1'b0;
          sum_q <= '0;
          if (fits(iss_key.in_addr, cfg_vec_len) && fits(iss_key.w_addr, cfg_vec_len))
            state <= S_REQ_A;
          else
            state <= S_DONE;
        end
        S_REQ_A: if (l1_req_ready) state <= S_WAIT_A;
        S_WAIT_A: if (l1_resp_valid) begin
          if (!l1_resp_hit) state <= S_DONE;
          else begin
            for (int t = 0; t < int'(THREADS); t++)
              regs[0][t] <= active(t, len_q) ? pick(l1_resp_data, key_q.in_addr, t) : '0;
            state <= S_REQ_B;
          end
        end
        S_REQ_B: if (l1_req_ready) state <= S_WAIT_B;
        S_WAIT_B: if (l1_resp_valid) begin
          if (!l1_resp_hit) state <= S_DONE;
          else begin
            for (int t = 0; t < int'(THREADS); t++)
              regs[1][t] <= active(t, len_q) ? pick(l1_resp_data, key_q.w_addr, t) : '0;
            grp   <= '0;
            state <= S_MUL;
          end
        end
        S_MUL: begin
          // SIMT_WIDTH lanes work on one group of threads per cycle
          for (int l = 0; l < int'(SIMT_WIDTH); l++) begin
            int t;
            t = int'(grp) * int'(SIMT_WIDTH) + l;
            if (t < int'(THREADS)) regs[2][t] <= regs[0][t] * regs[1][t];
          end
          grp <= grp + 1'b1;
          if ((32'(grp) + 1) * SIMT_WIDTH >= 32'(len_q)) state <= S_RED;
        end
        S_RED: begin
          sum_q <= red_sum;
          ok_q  <= 1'b1;
          state <= S_DONE;
        end
        S_DONE: if (cmp_ready) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  // the L1 request is held until it is accepted
  a_req_hold: assert property (@(posedge clk) disable iff (!rst_n)
                               l1_req_valid && !l1_req_ready |=> l1_req_valid && $stable(l1_req_blk));

endmodule
