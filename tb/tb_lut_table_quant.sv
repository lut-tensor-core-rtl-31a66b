// tb_lut_table_quant -- floating-point activations through INT8 table
// quantization on the default LUT Tensor Core.
//
// The testbench plays the software side for a W_INT2 x A_FP16 layer. It
// computes the real-valued table of each group of K activations and
// quantizes the table on its own to INT8 (scale = max|T| / 127, round to
// nearest). It then issues one LMMA per K-group with Accum = 0 and rescales
// each integer result by its table's scale. Two things are checked:
//   * the core's integer output equals the dot product that the quantized
//     table implies, exactly;
//   * the rescaled sum over a 64-long row stays within the quantization error
//     bound of the exact real dot product. The bound per group is
//     (2^W - 1) * scale / 2, because every entry is off by at most half a step
//     and the W planes weigh 1 + 2 + ... + 2^(W-1).
// Rows use the full N = 64 columns; 2 x 64 x 64 with W = 2 and W = 4.
module tb_lut_table_quant;
  import lut_tc_pkg::*;
  import lut_tc_tb_pkg::*;

  localparam int M = TC_M, N = TC_N, K = TC_K;
  localparam int LB = TC_LUT_BIT, WB = TC_W_BIT_MAX, AB = TC_ACC_BIT;
  localparam int E = 2**(K-1);
  localparam int KG = 64;

  logic clk = 0, rst_n = 0, in_valid = 0, out_ready = 0;
  logic in_ready, out_valid, out_err;
  lmma_instr_t instr;
  logic signed [LB-1:0]      tables [M][E];
  logic [WB-1:0][K-1:0]      wgt    [N];
  logic signed [AB-1:0]      acc_in [M][N];
  logic signed [AB-1:0]      out    [M][N];

  int checks = 0, failures = 0;

  lut_tensor_core dut (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .in_ready(in_ready), .instr_i(instr),
    .tables_i(tables), .wgt_i(wgt), .acc_i(acc_in),
    .out_valid(out_valid), .out_ready(out_ready), .out_err(out_err), .out_o(out));

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int round_int(real x);
    return (x >= 0.0) ? $rtoi(x + 0.5) : -$rtoi(-x + 0.5);
  endfunction

  real act [M][KG];
  int  wq  [N][KG];

  task automatic layer(int w);
    real    scale [M];
    real    tr    [E];
    int     tq    [M][E];
    real    approx [M][N];
    real    bound  [M];
    real    exact, mx, err;
    logic [KMAX-1:0] p;
    vec_t   q;
    longint iexp;
    lmma_instr_t i;
    for (int m = 0; m < M; m++) for (int c = 0; c < KG; c++)
      act[m][c] = real'(rand_range(-1000, 1000)) / 1000.0;
    for (int n = 0; n < N; n++) for (int c = 0; c < KG; c++) wq[n][c] = rand_range(0, (1 << w) - 1);
    for (int m = 0; m < M; m++) begin
      bound[m] = 1.0e-9;
      for (int n = 0; n < N; n++) approx[m][n] = 0.0;
    end
    i.m = 8'(M); i.n = 8'(N); i.k = 8'(K); i.a_dtype = A_FP16; i.w_dtype = w_dtype_e'(3'(w));
    i.accum_dtype = ACC_INT32; i.o_dtype = ACC_INT32;
    for (int kt = 0; kt < KG/K; kt++) begin
      // software: precompute and quantize each row's table
      for (int m = 0; m < M; m++) begin
        mx = 0.0;
        for (int j = 0; j < E; j++) begin
          tr[j] = -act[m][kt*K+K-1];
          for (int b = 0; b < K-1; b++) tr[j] += ((j >> b) & 1) != 0 ? act[m][kt*K+b] : -act[m][kt*K+b];
          if (tr[j] > mx) mx = tr[j];
          if (-tr[j] > mx) mx = -tr[j];
        end
        scale[m] = (mx > 0.0) ? mx / 127.0 : 1.0;
        for (int j = 0; j < E; j++) begin
          tq[m][j] = round_int(tr[j] / scale[m]);
          tables[m][j] = LB'(tq[m][j]);
        end
        bound[m] += real'((1 << w) - 1) * scale[m] / 2.0;
      end
      // software: offline weight remapping
      for (int n = 0; n < N; n++) begin
        for (int c = 0; c < KMAX; c++) q[c] = (c < K) ? wq[n][kt*K+c] : 0;
        wgt[n] = '0;
        for (int b = 0; b < w; b++) begin p = remap_plane(q, K, b); wgt[n][b] = p[K-1:0]; end
      end
      for (int m = 0; m < M; m++) for (int n = 0; n < N; n++) acc_in[m][n] = '0;
      @(negedge clk);
      instr = i; in_valid = 1;
      @(negedge clk);
      in_valid = 0;
      while (!out_valid) @(negedge clk);
      checks++;
      if (out_err) failures++;
      for (int m = 0; m < M; m++) for (int n = 0; n < N; n++) begin
        // exact integer result implied by the quantized table
        iexp = 0;
        for (int b = 0; b < w; b++) begin
          int sel;
          p = remap_plane_q(n, kt, b);
          sel = int'(p[K-2:0]);
          iexp += (p[K-1] ? -longint'(tq[m][sel]) : longint'(tq[m][sel])) <<< b;
        end
        checks++;
        if (longint'(out[m][n]) != iexp) begin
          failures++;
          if (failures < 10) $display("FAIL int m=%0d n=%0d got=%0d exp=%0d", m, n, out[m][n], iexp);
        end
        approx[m][n] += scale[m] * real'(out[m][n]);
      end
      out_ready = 1;
      @(negedge clk);
      out_ready = 0;
    end
    for (int m = 0; m < M; m++) for (int n = 0; n < N; n++) begin
      exact = 0.0;
      for (int c = 0; c < KG; c++) exact += act[m][c] * real'(2*wq[n][c] - ((1 << w) - 1));
      err = approx[m][n] - exact;
      if (err < 0.0) err = -err;
      checks++;
      if (err > bound[m]) begin
        failures++;
        $display("FAIL W=%0d m=%0d n=%0d approx=%f exact=%f bound=%f", w, m, n, approx[m][n], exact, bound[m]);
      end
    end
  endtask

  function automatic logic [KMAX-1:0] remap_plane_q(int n, int kt, int b);
    vec_t q;
    for (int c = 0; c < KMAX; c++) q[c] = (c < K) ? wq[n][kt*K+c] : 0;
    return remap_plane(q, K, b);
  endfunction

  initial begin
    instr = '0;
    for (int m = 0; m < M; m++) for (int n = 0; n < N; n++) acc_in[m][n] = '0;
    for (int m = 0; m < M; m++) for (int e = 0; e < E; e++) tables[m][e] = '0;
    for (int n = 0; n < N; n++) wgt[n] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    layer(2);
    layer(4);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
