// tb_lut_unit -- self-checking test of the bit-serial LUT unit.
//
// For random activation groups, random unsigned weights of 1..4 bits and a
// random starting accumulator, loads the accumulator, feeds the W remapped
// bit-planes with shift amounts 0..W-1 over W cycles and checks the result
// against acc0 + sum_k a[k]*(2q[k]-(2^W-1)). Checks that the result is ready
// after exactly W accumulate cycles and that it holds while en_i is low.
module tb_lut_unit;
  import lut_tc_tb_pkg::*;

  localparam int K = 4, LUT_BIT = 8, W_BIT_MAX = 4, ACC_BIT = 32, SH_W = 2;

  logic clk = 0, rst_n = 0, init = 0, en = 0;
  logic [SH_W-1:0]           shamt = '0;
  logic signed [LUT_BIT-1:0] tbl [2**(K-1)];
  logic        [K-1:0]       wbits = '0;
  logic signed [ACC_BIT-1:0] acc_i = '0, acc_o;

  int checks = 0, failures = 0;

  lut_unit #(.K(K), .LUT_BIT(LUT_BIT), .W_BIT_MAX(W_BIT_MAX), .ACC_BIT(ACC_BIT)) dut (
    .clk(clk), .rst_n(rst_n), .init_i(init), .en_i(en), .shamt_i(shamt),
    .table_i(tbl), .wbits_i(wbits), .acc_i(acc_i), .acc_o(acc_o));

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(longint exp_v, string what);
    checks++;
    if (longint'(acc_o) != exp_v) begin
      failures++;
      if (failures < 10) $display("FAIL %s acc=%0d exp=%0d", what, acc_o, exp_v);
    end
  endtask

  initial begin
    vec_t a, q;
    logic [KMAX-1:0] p;
    int w, cycles;
    longint acc0;
    for (int j = 0; j < 2**(K-1); j++) tbl[j] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    check(0, "reset");
    for (int t = 0; t < 400; t++) begin
      w = rand_range(1, W_BIT_MAX);
      for (int i = 0; i < KMAX; i++) begin a[i] = rand_range(-31, 31); q[i] = rand_range(0, (1 << w) - 1); end
      for (int j = 0; j < 2**(K-1); j++) tbl[j] = LUT_BIT'(table_entry(a, K, j));
      acc0 = longint'(rand_range(-100000, 100000));
      @(negedge clk);
      acc_i = ACC_BIT'(acc0); init = 1;
      @(negedge clk);
      init = 0;
      check(acc0, "init");
      cycles = 0;
      for (int b = 0; b < w; b++) begin
        p = remap_plane(q, K, b);
        wbits = p[K-1:0]; shamt = SH_W'(b); en = 1;
        @(negedge clk);
        cycles++;
      end
      en = 0;
      checks++;
      if (cycles != w) failures++;
      check(acc0 + ref_dot(a, q, K, w), "result");
      @(negedge clk);
      check(acc0 + ref_dot(a, q, K, w), "hold");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
