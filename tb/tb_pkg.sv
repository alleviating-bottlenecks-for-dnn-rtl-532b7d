// tb_pkg: helpers shared by the cluster and GPU testbenches. The contents of
// memory are a fixed function of the address, so that a behavioural L1 and
// the checking code agree without loading any data.
package tb_pkg;
  import oc_pkg::*;

  // word stored at byte address a: a small signed value
  function automatic word_t mem_word(addr_t a);
    logic [31:0] h;
    h = (a >> 2) * 32'h9E37_79B1;
    return word_t'(signed'({24'd0, h[31:24]}) - 128) >>> 3;
  endfunction

  function automatic word_t ref_dot(addr_t a, addr_t b, int len);
    word_t s = 0;
    for (int i = 0; i < len; i++) s += mem_word(a + addr_t'(4 * i)) * mem_word(b + addr_t'(4 * i));
    return s;
  endfunction
endpackage
