// lut_tc_tb_pkg -- reference arithmetic shared by the LUT Tensor Core testbenches.
//
// These functions stand for the software side of the design and for the
// expected results, written directly from the arithmetic rather than from
// the RTL structure:
//   table_entry : entry j of the symmetrized table of activations a[0..K-1],
//                 T[j] = -a[K-1] + sum_{k<K-1} (2*j[k]-1) * a[k]
//   remap_plane : bit-plane b of a group of unsigned K weights q[k], with the
//                 offline inversion of the low K-1 bits when the top bit is 1
//   ref_dot     : sum_k a[k] * (2*q[k] - (2^w - 1)), the dot product with the
//                 reinterpreted (symmetric) weights
package lut_tc_tb_pkg;

  localparam int KMAX = 8;

  typedef int vec_t [KMAX];

  function automatic int table_entry(vec_t a, int k, int j);
    int s = -a[k-1];
    for (int i = 0; i < k-1; i++) s += (((j >> i) & 1) != 0) ? a[i] : -a[i];
    return s;
  endfunction

  function automatic logic [KMAX-1:0] remap_plane(vec_t q, int k, int b);
    logic [KMAX-1:0] p = '0;
    for (int i = 0; i < k; i++) p[i] = 1'((q[i] >> b) & 1);
    if (p[k-1]) for (int i = 0; i < k-1; i++) p[i] = ~p[i];
    return p;
  endfunction

  function automatic longint ref_dot(vec_t a, vec_t q, int k, int w);
    longint s = 0;
    for (int i = 0; i < k; i++) s += longint'(a[i]) * longint'(2*q[i] - ((1 << w) - 1));
    return s;
  endfunction

  // Uniform integer in [lo, hi].
  function automatic int rand_range(int lo, int hi);
    return lo + int'($urandom_range(32'(hi - lo)));
  endfunction

endpackage
