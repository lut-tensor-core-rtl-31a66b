// tb_lut_tensor_core -- end-to-end test of the LUT Tensor Core at its default
// M2N64K4 shape, INT8 tables, 1..4-bit weights, INT32 accumulation.
//
// The testbench plays the software side: it draws activations, precomputes
// the symmetrized tables, draws unsigned weights and remaps them offline into
// grouped bit-planes, then issues LMMA instructions and compares every
// output with Accum + sum_k a[m][k] * (2q[n][k] - (2^W - 1)). It checks the
// W_BIT+1 cycle latency, and counts each mechanism it must exercise:
// every weight width 1..4, a negated lookup, a non-zero Accum, an output
// stall (out_ready low), an illegal instruction, a back-to-back issue and a
// K-loop in which one instruction's output is the next one's Accum.
module tb_lut_tensor_core;
  import lut_tc_pkg::*;
  import lut_tc_tb_pkg::*;

  localparam int M = TC_M, N = TC_N, K = TC_K;
  localparam int LB = TC_LUT_BIT, WB = TC_W_BIT_MAX, AB = TC_ACC_BIT;
  localparam int E = 2**(K-1);

  logic clk = 0, rst_n = 0, in_valid = 0, out_ready = 0;
  logic in_ready, out_valid, out_err;
  lmma_instr_t instr;
  logic signed [LB-1:0]      tables [M][E];
  logic [WB-1:0][K-1:0]      wgt    [N];
  logic signed [AB-1:0]      acc_in [M][N];
  logic signed [AB-1:0]      out    [M][N];

  int checks = 0, failures = 0;
  int cnt_w [5];
  int cnt_neg = 0, cnt_accum = 0, cnt_stall = 0, cnt_illegal = 0, cnt_b2b = 0, cnt_kloop = 0;

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

  vec_t   a [M];
  vec_t   q [N];
  longint acc0 [M][N];

  function automatic lmma_instr_t mk(int w);
    lmma_instr_t i;
    i.m = 8'(M); i.n = 8'(N); i.k = 8'(K);
    i.a_dtype = A_INT8; i.w_dtype = w_dtype_e'(3'(w));
    i.accum_dtype = ACC_INT32; i.o_dtype = ACC_INT32;
    return i;
  endfunction

  // Draw operands for weight width w and drive them onto the ports.
  task automatic draw(int w, bit zero_acc);
    logic [KMAX-1:0] p;
    for (int m = 0; m < M; m++) begin
      for (int i = 0; i < KMAX; i++) a[m][i] = rand_range(-31, 31);
      for (int e = 0; e < E; e++) tables[m][e] = LB'(table_entry(a[m], K, e));
    end
    for (int n = 0; n < N; n++) begin
      for (int i = 0; i < KMAX; i++) q[n][i] = rand_range(0, (1 << w) - 1);
      wgt[n] = '0;
      for (int b = 0; b < w; b++) begin
        p = remap_plane(q[n], K, b);
        wgt[n][b] = p[K-1:0];
        if (p[K-1]) cnt_neg++;
      end
    end
    for (int m = 0; m < M; m++) for (int n = 0; n < N; n++) begin
      acc0[m][n] = zero_acc ? 0 : longint'(rand_range(-1000000, 1000000));
      acc_in[m][n] = AB'(acc0[m][n]);
      if (acc0[m][n] != 0) cnt_accum++;
    end
  endtask

  task automatic compare(int w, string what);
    longint exp_v;
    for (int m = 0; m < M; m++) for (int n = 0; n < N; n++) begin
      exp_v = acc0[m][n] + ref_dot(a[m], q[n], K, w);
      checks++;
      if (longint'(out[m][n]) != exp_v) begin
        failures++;
        if (failures < 10) $display("FAIL %s m=%0d n=%0d got=%0d exp=%0d", what, m, n, out[m][n], exp_v);
      end
    end
  endtask

  // Issue one LMMA and wait for its result; checks latency and the result.
  task automatic lmma(int w, int stall);
    int lat = 0;
    @(negedge clk);
    instr = mk(w); in_valid = 1;
    #1;
    while (!in_ready) begin @(negedge clk); #1; end
    @(negedge clk);
    in_valid = 0;
    lat = 1;
    while (!out_valid) begin @(negedge clk); lat++; end
    checks++;
    if (lat != w + 1) begin failures++; $display("FAIL latency %0d for W=%0d", lat, w); end
    checks++;
    if (out_err) begin failures++; $display("FAIL unexpected err"); end
    compare(w, "lmma");
    for (int s = 0; s < stall; s++) begin
      @(negedge clk);
      cnt_stall++;
      checks++;
      if (!out_valid) begin failures++; $display("FAIL valid dropped in stall"); end
      compare(w, "stall hold");
    end
    cnt_w[w]++;
    out_ready = 1;
    @(negedge clk);
    out_ready = 0;
  endtask

  initial begin
    longint kacc [M][N];
    vec_t   afull [M][8];
    vec_t   qfull [N][8];
    int w;
    instr = mk(1);
    for (int i = 0; i < 5; i++) cnt_w[i] = 0;
    draw(1, 1);
    repeat (3) @(posedge clk);
    rst_n = 1;

    // Random single LMMAs of every width, some with output stalls.
    for (int t = 0; t < 24; t++) begin
      w = 1 + (t % WB);
      draw(w, (t % 5) == 0);
      lmma(w, t % 3);
    end

    // Illegal instruction: 8-bit weights are outside INT1..INT4.
    draw(2, 0);
    @(negedge clk);
    instr = mk(2); instr.k = 8'(2*K); in_valid = 1;
    @(negedge clk);
    in_valid = 0;
    checks++;
    if (!(out_valid && out_err)) begin failures++; $display("FAIL illegal not flagged"); end
    else cnt_illegal++;
    for (int m = 0; m < M; m++) for (int n = 0; n < N; n++) begin
      checks++;
      if (longint'(out[m][n]) != acc0[m][n]) failures++;
    end
    out_ready = 1;
    @(negedge clk);
    out_ready = 0;

    // Back-to-back: next instruction accepted in the cycle the result leaves.
    draw(2, 0);
    @(negedge clk);
    instr = mk(2); in_valid = 1;
    @(negedge clk);
    while (!out_valid) @(negedge clk);
    compare(2, "b2b first");
    draw(3, 0);
    instr = mk(3); out_ready = 1;
    #1;
    if (in_ready) cnt_b2b++;
    @(negedge clk);
    in_valid = 0; out_ready = 0;
    repeat (3) @(negedge clk);
    checks++;
    if (!out_valid) begin failures++; $display("FAIL b2b second not done"); end
    compare(3, "b2b second");
    out_ready = 1;
    @(negedge clk);
    out_ready = 0;

    // K-loop: a 2 x 32 by 32 x 64 INT2 product as 8 chained LMMAs.
    for (int m = 0; m < M; m++) for (int n = 0; n < N; n++) kacc[m][n] = 0;
    for (int kb = 0; kb < 8; kb++) begin
      draw(2, 1);
      for (int m = 0; m < M; m++) afull[m][kb] = a[m];
      for (int n = 0; n < N; n++) qfull[n][kb] = q[n];
      for (int m = 0; m < M; m++) for (int n = 0; n < N; n++) begin
        acc0[m][n] = kacc[m][n];
        acc_in[m][n] = AB'(kacc[m][n]);
      end
      lmma(2, 0);
      for (int m = 0; m < M; m++) for (int n = 0; n < N; n++) kacc[m][n] = longint'(out[m][n]);
      if (kb > 0) cnt_kloop++;
    end
    for (int m = 0; m < M; m++) for (int n = 0; n < N; n++) begin
      longint s;
      s = 0;
      for (int kb = 0; kb < 8; kb++) s += ref_dot(afull[m][kb], qfull[n][kb], K, 2);
      checks++;
      if (kacc[m][n] != s) begin failures++; if (failures < 10) $display("FAIL kloop m=%0d n=%0d", m, n); end
    end

    $display("mechanisms: W1=%0d W2=%0d W3=%0d W4=%0d neg=%0d accum=%0d stall=%0d illegal=%0d b2b=%0d kloop=%0d",
             cnt_w[1], cnt_w[2], cnt_w[3], cnt_w[4], cnt_neg, cnt_accum, cnt_stall, cnt_illegal, cnt_b2b, cnt_kloop);
    for (int i = 1; i <= WB; i++) begin checks++; if (cnt_w[i] == 0) failures++; end
    checks++; if (cnt_neg == 0) failures++;
    checks++; if (cnt_accum == 0) failures++;
    checks++; if (cnt_stall == 0) failures++;
    checks++; if (cnt_illegal == 0) failures++;
    checks++; if (cnt_b2b == 0) failures++;
    checks++; if (cnt_kloop == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
