// l1_model: behavioural model of an SM's L1 data cache read port, as seen by
// the assistant warp; not synthesizable design, only for testbenches. A
// request is accepted when no other is pending and answered LAT cycles later
// with the whole 128-byte block, whose words follow tb_pkg::mem_word. The
// cache reports a miss for blocks whose number modulo 64 is in miss_mask
// set by the testbench.
module l1_model
  import oc_pkg::*;
#(
  parameter int LAT = 2
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic [63:0] miss_mask,
  input  logic      req_valid,
  input  blk_addr_t req_blk,
  output logic      req_ready,
  output logic      resp_valid,
  output logic      resp_hit,
  output block_t    resp_data
);
  int cnt;
  logic pend;
  blk_addr_t blk;
  assign req_ready = !pend;
  always @(posedge clk) begin
    if (!rst_n) begin
      pend <= 1'b0; resp_valid <= 1'b0; resp_hit <= 1'b0; cnt <= 0; blk <= '0;
      resp_data <= '0;
    end else begin
      resp_valid <= 1'b0;
      if (req_valid && req_ready) begin
        pend <= 1'b1; blk <= req_blk; cnt <= LAT - 1;
      end else if (pend) begin
        if (cnt == 0) begin
          pend <= 1'b0;
          resp_valid <= 1'b1;
          resp_hit <= !miss_mask[blk[5:0]];
          for (int w = 0; w < int'(BLOCK_WORDS); w++)
            resp_data[w] <= tb_pkg::mem_word({blk, 7'(w * 4)});
        end else cnt <= cnt - 1;
      end
    end
  end
endmodule
