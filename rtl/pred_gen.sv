// pred_gen: prediction logic of the intra-SM scheme.
//
// When an SM computes input vector x weight vector of a filter window, the same
// input vector will meet the weight rows above the current one once the window
// has slid down by 1, 2, ... rows. For a weight vector in window row j
// (0 = top row) this block therefore emits the j address pairs
//     (in_addr, w_addr - d * cfg_w_stride),   d = 1 .. j
// one per cycle on a valid/ready stream, to be inserted into the Precompute
// Table as predicted computations. Over the rows of a K-row window this gives
// K(K-1)/2 predictions; for the paper's 3x3 example they are row1 x w-row0,
// row2 x w-row1 and row2 x w-row0, the three listed there. The paper refers to
// its Algorithm 1 for this logic without printing it; the rule above is read
// from its prose and example. The request interface, the weight row stride
// input and the order of the outputs are this design's own.
//
// Timing: a request is accepted when the generator is idle (req_ready); the
// first prediction is offered in the next cycle and one follows per accepted
// output. A request with w_row = 0 produces nothing. Reset is synchronous.
module pred_gen
  import oc_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  input  addr_t            cfg_w_stride,   // bytes between weight rows
  input  logic             req_valid,
  output logic             req_ready,
  input  comp_key_t        req_key,
  input  logic [ROW_W-1:0] req_w_row,
  output logic             out_valid,
  input  logic             out_ready,
  output comp_key_t        out_key
);

  logic [ROW_W-1:0] remaining;
  addr_t            in_q, w_q;

  assign req_ready     = (remaining == '0);
  assign out_valid     = (remaining != '0);
  assign out_key.in_addr = in_q;
  assign out_key.w_addr  = w_q;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      remaining <= '0;
      in_q      <= '0;
      w_q       <= '0;
    end else if (req_valid && req_ready) begin
      remaining <= req_w_row;
      in_q      <= req_key.in_addr;
      w_q       <= req_key.w_addr - cfg_w_stride;
    end else if (out_valid && out_ready) begin
      remaining <= remaining - 1'b1;
      w_q       <= w_q - cfg_w_stride;
    end
  end

endmodule
