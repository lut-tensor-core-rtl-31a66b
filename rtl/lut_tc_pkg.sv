// lut_tc_pkg -- shared constants and types of the LUT-based Tensor Core.
//
// The default tile shape M2N64K4 (two activation rows, 64 weight columns,
// groups of four activations per table), the INT8 table width and the
// 1..4-bit weight range follow the published design. The 32-bit integer
// accumulator and the binary layout of the LMMA instruction are choices of
// this implementation: the instruction is only given as the mnemonic
//   lmma.{M}{N}{K}.{A_dtype}{W_dtype}{Accum_dtype}{O_dtype}
// and the struct below carries exactly those fields.
package lut_tc_pkg;

  // Default tile shape and widths.
  localparam int unsigned TC_M      = 2;   // activation rows = number of tables
  localparam int unsigned TC_N      = 64;  // weight columns sharing each table
  localparam int unsigned TC_K      = 4;   // activations per table group
  localparam int unsigned TC_LUT_BIT   = 8;   // width of a quantized table entry
  localparam int unsigned TC_W_BIT_MAX = 4;   // widest weight, in bit-serial cycles
  localparam int unsigned TC_ACC_BIT   = 32;  // accumulator / output width

  // Activation type the tables were precomputed from. The tables themselves
  // are always LUT_BIT-bit integers (table quantization), so this field does
  // not change the datapath.
  typedef enum logic [2:0] {
    A_INT8  = 3'd0,
    A_FP8   = 3'd1,
    A_INT16 = 3'd2,
    A_FP16  = 3'd3
  } a_dtype_e;

  // Weight type: unsigned integer of 1..4 bits, reinterpreted offline as a
  // sum of {-1,+1} bit-planes. The code is the number of bits.
  typedef enum logic [2:0] {
    W_INT1 = 3'd1,
    W_INT2 = 3'd2,
    W_INT3 = 3'd3,
    W_INT4 = 3'd4
  } w_dtype_e;

  // Accumulator and output types. Only INT32 has a datapath here.
  typedef enum logic [1:0] {
    ACC_INT32 = 2'd0,
    ACC_FP16  = 2'd1,
    ACC_FP32  = 2'd2
  } acc_dtype_e;

  // One LMMA instruction: O[M,N] = A[M,K] x W[N,K] + Accum[M,N].
  typedef struct packed {
    logic [7:0] m;          // tile rows requested
    logic [7:0] n;          // tile columns requested
    logic [7:0] k;          // reduction length requested
    a_dtype_e   a_dtype;
    w_dtype_e   w_dtype;
    acc_dtype_e accum_dtype;
    acc_dtype_e o_dtype;
  } lmma_instr_t;

  // Width of a shift amount / bit-plane index for w weight bits (at least 1).
  function automatic int unsigned plane_idx_bits(int unsigned w);
    return (w > 1) ? $clog2(w) : 1;
  endfunction

endpackage
