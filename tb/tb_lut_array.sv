// tb_lut_array -- self-checking test of the M x N LUT array (M=2, N=8).
//
// Gives each row its own random table and each column its own random
// unsigned weights, runs W bit-planes and checks every output against
// Accum + dot(activation row m, reinterpreted weight column n). Distinct
// rows and columns catch a wrong table or weight broadcast.
module tb_lut_array;
  import lut_tc_tb_pkg::*;

  localparam int M = 2, N = 8, K = 4, LUT_BIT = 8, W_BIT_MAX = 4, ACC_BIT = 32, SH_W = 2;

  logic clk = 0, rst_n = 0, init = 0, en = 0;
  logic [SH_W-1:0]           shamt = '0;
  logic signed [LUT_BIT-1:0] tbl    [M][2**(K-1)];
  logic        [K-1:0]       wplane [N];
  logic signed [ACC_BIT-1:0] acc_i  [M][N];
  logic signed [ACC_BIT-1:0] acc_o  [M][N];

  int checks = 0, failures = 0;

  lut_array #(.M(M), .N(N), .K(K), .LUT_BIT(LUT_BIT), .W_BIT_MAX(W_BIT_MAX), .ACC_BIT(ACC_BIT)) dut (
    .clk(clk), .rst_n(rst_n), .init_i(init), .en_i(en), .shamt_i(shamt),
    .tables_i(tbl), .wplane_i(wplane), .acc_i(acc_i), .acc_o(acc_o));

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    vec_t a [M];
    vec_t q [N];
    logic [KMAX-1:0] p;
    longint acc0 [M][N];
    int w;
    longint exp_v;
    for (int n = 0; n < N; n++) wplane[n] = '0;
    for (int m = 0; m < M; m++) for (int e = 0; e < 2**(K-1); e++) tbl[m][e] = '0;
    for (int m = 0; m < M; m++) for (int n = 0; n < N; n++) acc_i[m][n] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 100; t++) begin
      w = rand_range(1, W_BIT_MAX);
      for (int m = 0; m < M; m++) begin
        for (int i = 0; i < KMAX; i++) a[m][i] = rand_range(-31, 31);
        for (int e = 0; e < 2**(K-1); e++) tbl[m][e] = LUT_BIT'(table_entry(a[m], K, e));
      end
      for (int n = 0; n < N; n++) for (int i = 0; i < KMAX; i++) q[n][i] = rand_range(0, (1 << w) - 1);
      @(negedge clk);
      for (int m = 0; m < M; m++) for (int n = 0; n < N; n++) begin
        acc0[m][n] = longint'(rand_range(-5000, 5000));
        acc_i[m][n] = ACC_BIT'(acc0[m][n]);
      end
      init = 1;
      @(negedge clk);
      init = 0;
      for (int b = 0; b < w; b++) begin
        for (int n = 0; n < N; n++) begin p = remap_plane(q[n], K, b); wplane[n] = p[K-1:0]; end
        shamt = SH_W'(b); en = 1;
        @(negedge clk);
      end
      en = 0;
      for (int m = 0; m < M; m++) for (int n = 0; n < N; n++) begin
        exp_v = acc0[m][n] + ref_dot(a[m], q[n], K, w);
        checks++;
        if (longint'(acc_o[m][n]) != exp_v) begin
          failures++;
          if (failures < 10) $display("FAIL m=%0d n=%0d got=%0d exp=%0d", m, n, acc_o[m][n], exp_v);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
