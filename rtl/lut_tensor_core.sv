// lut_tensor_core -- LUT-based Tensor Core executing LMMA instructions.
//
// Computes O[M,N] = A[M,K] x W[N,K] + Accum[M,N] for one tile, where
//   * A arrives as M precomputed, symmetrized, quantized tables
//     (tables_i[m][j] = -a[m][K-1] + sum_{k<K-1} (2*j[k]-1)*a[m][k]),
//     built in software ahead of the instruction;
//   * W arrives as N grouped weights, each W_BIT bit-planes of K bits,
//     reinterpreted offline so that an unsigned q stands for
//     q' = 2q - (2^W_BIT - 1), and with the low K-1 bits of a plane inverted
//     where its top bit is 1;
//   * Accum is the INT32 starting value of every output.
// Blocks: lmma_ctrl (sequencing), lut_table_buf (tables), weight_buf
// (grouped binary weights, one plane per cycle), lut_array (M x N LUT units
// with table broadcast along rows and weight broadcast along columns).
//
// Timing: the instruction and all operands are taken in the cycle
// in_valid && in_ready; out_valid rises W_BIT+1 cycles later and holds,
// with out_o stable, until out_ready. out_err marks an instruction the
// hardware does not support (out_o is then Accum). The tile shape, table
// width and bit-serial scheme follow the published design; operand ports,
// handshakes and INT32 accumulation are this implementation's choices.
module lut_tensor_core
  import lut_tc_pkg::*;
#(
  parameter int unsigned M         = TC_M,
  parameter int unsigned N         = TC_N,
  parameter int unsigned K         = TC_K,
  parameter int unsigned LUT_BIT   = TC_LUT_BIT,
  parameter int unsigned W_BIT_MAX = TC_W_BIT_MAX,
  parameter int unsigned ACC_BIT   = TC_ACC_BIT,
  localparam int unsigned SH_W     = plane_idx_bits(W_BIT_MAX)
) (
  input  logic                            clk,
  input  logic                            rst_n,
  // instruction and operands
  input  logic                            in_valid,
  output logic                            in_ready,
  input  lmma_instr_t                     instr_i,
  input  logic signed [LUT_BIT-1:0]       tables_i [M][2**(K-1)],
  input  logic [W_BIT_MAX-1:0][K-1:0]     wgt_i    [N],
  input  logic signed [ACC_BIT-1:0]       acc_i    [M][N],
  // result
  output logic                            out_valid,
  input  logic                            out_ready,
  output logic                            out_err,
  output logic signed [ACC_BIT-1:0]       out_o    [M][N]
);

  logic                      load, en;
  logic [SH_W-1:0]           shamt;
  logic signed [LUT_BIT-1:0] tables_q [M][2**(K-1)];
  logic [K-1:0]              wplane   [N];

  lmma_ctrl #(.M(M), .N(N), .K(K), .W_BIT_MAX(W_BIT_MAX)) u_ctrl (
    .clk       (clk),
    .rst_n     (rst_n),
    .in_valid  (in_valid),
    .in_ready  (in_ready),
    .instr_i   (instr_i),
    .load_o    (load),
    .en_o      (en),
    .shamt_o   (shamt),
    .out_valid (out_valid),
    .out_ready (out_ready),
    .err_o     (out_err)
  );

  lut_table_buf #(.M(M), .K(K), .LUT_BIT(LUT_BIT)) u_tables (
    .clk      (clk),
    .rst_n    (rst_n),
    .load_i   (load),
    .tables_i (tables_i),
    .tables_o (tables_q)
  );

  weight_buf #(.N(N), .K(K), .W_BIT_MAX(W_BIT_MAX)) u_weights (
    .clk      (clk),
    .rst_n    (rst_n),
    .load_i   (load),
    .wgt_i    (wgt_i),
    .sel_i    (shamt),
    .wplane_o (wplane)
  );

  lut_array #(
    .M(M), .N(N), .K(K), .LUT_BIT(LUT_BIT), .W_BIT_MAX(W_BIT_MAX), .ACC_BIT(ACC_BIT)
  ) u_array (
    .clk      (clk),
    .rst_n    (rst_n),
    .init_i   (load),
    .en_i     (en),
    .shamt_i  (shamt),
    .tables_i (tables_q),
    .wplane_i (wplane),
    .acc_i    (acc_i),
    .acc_o    (out_o)
  );

endmodule
