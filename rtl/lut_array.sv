// lut_array -- the M x N array of LUT units of one MNK tile.
//
// Row m of the array holds the table of activation row m and broadcasts it to
// all N units of the row (table-shared parallelism). Column n receives the
// current bit-plane of grouped weight n and broadcasts it to all M units of
// the column (query-shared parallelism). Every unit accumulates
//   acc[m][n] += (+/- T_m[w_n]) << b
// for the bit-plane b in shamt_i while en_i is high, and loads acc_i[m][n]
// while init_i is high. The broadcast structure follows the published
// array; the control inputs are this implementation's.
module lut_array #(
  parameter int unsigned M         = 2,
  parameter int unsigned N         = 64,
  parameter int unsigned K         = 4,
  parameter int unsigned LUT_BIT   = 8,
  parameter int unsigned W_BIT_MAX = 4,
  parameter int unsigned ACC_BIT   = 32,
  localparam int unsigned SH_W     = lut_tc_pkg::plane_idx_bits(W_BIT_MAX)
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      init_i,
  input  logic                      en_i,
  input  logic        [SH_W-1:0]    shamt_i,
  input  logic signed [LUT_BIT-1:0] tables_i [M][2**(K-1)],
  input  logic        [K-1:0]       wplane_i [N],
  input  logic signed [ACC_BIT-1:0] acc_i    [M][N],
  output logic signed [ACC_BIT-1:0] acc_o    [M][N]
);

  for (genvar m = 0; m < M; m++) begin : g_row
    for (genvar n = 0; n < N; n++) begin : g_col
      lut_unit #(
        .K(K), .LUT_BIT(LUT_BIT), .W_BIT_MAX(W_BIT_MAX), .ACC_BIT(ACC_BIT)
      ) u_unit (
        .clk     (clk),
        .rst_n   (rst_n),
        .init_i  (init_i),
        .en_i    (en_i),
        .shamt_i (shamt_i),
        .table_i (tables_i[m]),
        .wbits_i (wplane_i[n]),
        .acc_i   (acc_i[m][n]),
        .acc_o   (acc_o[m][n])
      );
    end
  end

endmodule
