// tb_patterns: register-content generators shared by the testbenches.
//
// Builds 64-component registers by walking the components one by one: each
// step adds d1 inside a group of K components and d2 when a new group starts.
// This incremental form is independent of the closed form used by the
// compressor and decompressor, so it serves as a reference for both.
package tb_patterns;
  import rrcd_pkg::*;

  typedef logic [31:0] reg64_t [64];

  function automatic void make_reg(input int unsigned k, input logic [31:0] base,
                                   input logic [31:0] d1, input logic [31:0] d2,
                                   output reg64_t r);
    r[0] = base;
    for (int i = 1; i < 64; i++)
      r[i] = r[i-1] + (((i % k) == 0) ? d2 : d1);
  endfunction

  function automatic void rand_reg(output reg64_t r);
    for (int i = 0; i < 64; i++) r[i] = $urandom;
  endfunction

  function automatic block_t get_block(input reg64_t r, input int b);
    block_t o;
    for (int l = 0; l < 16; l++) o[l*32 +: 32] = r[16*b + l];
    return o;
  endfunction

  // a random compressible register: group size 2..64, small or large steps
  function automatic void rand_comp_reg(output reg64_t r, output int unsigned k);
    int unsigned sh;
    logic [31:0] d1, d2;
    sh = $urandom_range(0, 5);
    k  = 2 << sh;
    d1 = ($urandom_range(0, 3) == 0) ? 32'd0 : ($urandom_range(0, 1) ? 32'd4 : $urandom);
    d2 = $urandom;
    make_reg(k, $urandom, d1, d2, r);
  endfunction
endpackage
