// tme_tb_pkg -- reference model shared by the TME testbenches.
//
// mem_byte() defines the content of the simulated memory: every byte is a
// hash of its own address, so any byte read from anywhere can be predicted
// without storing the memory.
// ref_elem_addr() and ref_line() compute, straight from the formulas
//   c_i = omega_i + (o / (w_0 * ... * w_{i-1})) % w_i ,
//   addr = b + s' * sum_i c_i * sigma_i ,
// which byte address each element of a reorganized line comes from and what
// the line holds. They evaluate the formula for every element of the line
// on its own, whereas the hardware steps counters, so the two are
// independent.
package tme_tb_pkg;
  import tme_pkg::*;

  function automatic logic [7:0] mem_byte(input logic [31:0] a);
    logic [31:0] h;
    h = a * 32'h9E37_79B1;
    return h[31:24] ^ h[15:8] ^ a[7:0];
  endfunction

  function automatic logic [31:0] ref_elem_addr(input cfg_desc_t e, input logic [31:0] elem);
    logic [31:0] q, off, w;
    q   = elem;
    off = 0;
    for (int i = 0; i < N_MAX; i++) begin
      w   = (e.dims[i].length == 0) ? 32'd1 : e.dims[i].length;
      off += (e.dims[i].start + q % w) * e.dims[i].stride;
      q   = q / w;
    end
    return e.target_base + off * e.width;
  endfunction

  // First element index of the line holding byte address a.
  function automatic logic [31:0] ref_first_elem(input cfg_desc_t e, input logic [31:0] a);
    logic [31:0] la;
    la = {a[31:6], 6'd0};
    return (la - e.reorg_base) / 32'(e.width);
  endfunction

  function automatic logic [LINE_W-1:0] ref_line(input cfg_desc_t e, input logic [31:0] a);
    logic [LINE_W-1:0] l;
    logic [31:0] first, src;
    int n;
    l     = '0;
    n     = LINE_BYTES / 32'(e.width);
    first = ref_first_elem(e, a);
    for (int k = 0; k < n; k++) begin
      src = ref_elem_addr(e, first + k);
      for (int b = 0; b < e.width; b++)
        l[(k * e.width + b) * 8 +: 8] = mem_byte(src + b);
    end
    return l;
  endfunction

  // A specification with every dimension at identity (start 0, stride 0,
  // length 1).
  function automatic cfg_desc_t blank_desc();
    cfg_desc_t e;
    e = '0;
    for (int i = 0; i < N_MAX; i++) e.dims[i].length = 1;
    return e;
  endfunction

endpackage
