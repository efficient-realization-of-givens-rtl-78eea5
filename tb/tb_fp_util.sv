// tb_fp_util: helpers shared by the testbenches: random FP64 values with a
// The stimulus and checks are this design's own; the paper gives no test vectors.
// bounded exponent, so that products and sums stay normal numbers.
package tb_fp_util;
  function automatic logic [63:0] rand_fp64(int unsigned erange);
    logic [63:0] v;
    int unsigned e;
    e = 1023 - erange + ($urandom % (2 * erange + 1));
    v = {$urandom[0], 11'(e), 20'($urandom), 32'($urandom)};
    return v;
  endfunction
  function automatic logic [63:0] rand_pos_fp64(int unsigned erange);
    logic [63:0] v;
    v = rand_fp64(erange);
    v[63] = 1'b0;
    return v;
  endfunction
endpackage
