// oc_fifo: small synchronous FIFO of any element type, used for the inbox of
// assigned computations and the queue of atomic adds of an SM unit.
// Push when in_valid && in_ready (not full); the head is visible on out_data
// while out_valid, and out_ready pops it. Depth is a power of two or not;
// pointers wrap at DEPTH. Reset is synchronous and empties the FIFO; the
// storage itself is not reset, as it is only read while out_valid is high.
// This helper and its use are this design's own; the paper has no queues.
module oc_fifo #(
  parameter type         T     = logic [31:0],
  parameter int unsigned DEPTH = 4
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  output logic in_ready,
  input  T     in_data,
  output logic out_valid,
  input  logic out_ready,
  output T     out_data
);
  localparam int unsigned PW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  T mem [DEPTH];
  logic [PW-1:0] rd, wr;
  logic [PW:0]   cnt;

  assign in_ready  = (32'(cnt) < DEPTH);
  assign out_valid = (cnt != '0);
  assign out_data  = mem[rd];

  function automatic logic [PW-1:0] inc(logic [PW-1:0] p);
    return (32'(p) == DEPTH - 1) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      rd <= '0; wr <= '0; cnt <= '0;
    end else begin
      if (in_valid && in_ready) begin
        mem[wr] <= in_data;
        wr <= inc(wr);
      end
      if (out_valid && out_ready) rd <= inc(rd);
      cnt <= cnt + (PW+1)'(in_valid && in_ready) - (PW+1)'(out_valid && out_ready);
    end
  end
endmodule
