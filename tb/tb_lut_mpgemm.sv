// tb_lut_mpgemm -- a tiled mixed-precision GEMM on the default LUT Tensor Core.
//
// Plays the role of an LUT-mpGEMM kernel: O[Mg,Ng] = A[Mg,Kg] x W[Ng,Kg] with
// unsigned W_BIT-bit weights and integer activations, cut into M2N64K4 LMMA
// tiles. Each output tile walks the K dimension with a chain of LMMAs in
// which the previous result is the next Accum; the next LMMA is issued in the
// cycle the previous result is taken, so a chain runs at one LMMA every
// W_BIT+1 cycles, which is checked. The result is compared with the uint form
// of the reinterpreted product, 2*sum(a*q) - (2^W_BIT - 1)*sum(a), i.e. with
// the weights' original integers rather than the bit-planes. The sizes are
// small stand-ins for the LLM layer shapes (the workload shapes differ only
// in size); W_BIT = 1, 2, 3 and 4 are run.
module tb_lut_mpgemm;
  import lut_tc_pkg::*;
  import lut_tc_tb_pkg::*;

  localparam int M = TC_M, N = TC_N, K = TC_K;
  localparam int LB = TC_LUT_BIT, WB = TC_W_BIT_MAX, AB = TC_ACC_BIT;
  localparam int E = 2**(K-1);
  localparam int MG = 4, NG = 128, KG = 32;

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
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int act [MG][KG];
  int wq  [NG][KG];

  // Drive tile (mt, nt, kt) operands: tables from activations, remapped planes.
  task automatic drive_tile(int mt, int nt, int kt, int w);
    vec_t a, q;
    logic [KMAX-1:0] p;
    for (int m = 0; m < M; m++) begin
      for (int i = 0; i < KMAX; i++) a[i] = (i < K) ? act[mt*M+m][kt*K+i] : 0;
      for (int e = 0; e < E; e++) tables[m][e] = LB'(table_entry(a, K, e));
    end
    for (int n = 0; n < N; n++) begin
      for (int i = 0; i < KMAX; i++) q[i] = (i < K) ? wq[nt*N+n][kt*K+i] : 0;
      wgt[n] = '0;
      for (int b = 0; b < w; b++) begin p = remap_plane(q, K, b); wgt[n][b] = p[K-1:0]; end
    end
  endtask

  task automatic gemm(int w);
    int cyc;
    longint sa, sq, exp_v;
    lmma_instr_t i;
    for (int r = 0; r < MG; r++) for (int c = 0; c < KG; c++) act[r][c] = rand_range(-31, 31);
    for (int r = 0; r < NG; r++) for (int c = 0; c < KG; c++) wq[r][c] = rand_range(0, (1 << w) - 1);
    i.m = 8'(M); i.n = 8'(N); i.k = 8'(K); i.a_dtype = A_INT8; i.w_dtype = w_dtype_e'(3'(w));
    i.accum_dtype = ACC_INT32; i.o_dtype = ACC_INT32;
    instr = i;
    for (int mt = 0; mt < MG/M; mt++) for (int nt = 0; nt < NG/N; nt++) begin
      // first LMMA of the chain, Accum = 0
      @(negedge clk);
      drive_tile(mt, nt, 0, w);
      for (int m = 0; m < M; m++) for (int n = 0; n < N; n++) acc_in[m][n] = '0;
      in_valid = 1;
      cyc = 0;
      for (int kt = 1; kt <= KG/K; kt++) begin
        @(negedge clk);
        cyc++;
        if (kt == 1) in_valid = 0;
        while (!out_valid) begin @(negedge clk); cyc++; end
        checks++;
        if (out_err) failures++;
        out_ready = 1;
        if (kt < KG/K) begin
          drive_tile(mt, nt, kt, w);
          acc_in = out;
          in_valid = 1;
        end else begin
          // end of the chain: compare the output tile
          for (int m = 0; m < M; m++) for (int n = 0; n < N; n++) begin
            sa = 0; sq = 0;
            for (int c = 0; c < KG; c++) begin
              sa += longint'(act[mt*M+m][c]);
              sq += longint'(act[mt*M+m][c]) * wq[nt*N+n][c];
            end
            exp_v = 2*sq - longint'((1 << w) - 1) * sa;
            checks++;
            if (longint'(out[m][n]) != exp_v) begin
              failures++;
              if (failures < 10) $display("FAIL W=%0d tile(%0d,%0d) m=%0d n=%0d got=%0d exp=%0d",
                                          w, mt, nt, m, n, out[m][n], exp_v);
            end
          end
        end
        @(negedge clk);
        // the next LMMA was accepted on that edge: drop in_valid after it
        in_valid = 0;
        out_ready = 0;
        cyc++;
      end
      // chain of KG/K LMMAs: (KG/K)*(W+1) cycles from first accept to last
      // result, plus the cycle in which the last result is taken.
      checks++;
      if (cyc != (KG/K) * (w + 1) + 1) begin
        failures++;
        $display("FAIL W=%0d chain took %0d cycles, expected %0d", w, cyc, (KG/K) * (w + 1) + 1);
      end
    end
  endtask

  initial begin
    instr = '0;
    for (int m = 0; m < M; m++) for (int n = 0; n < N; n++) acc_in[m][n] = '0;
    for (int m = 0; m < M; m++) for (int e = 0; e < E; e++) tables[m][e] = '0;
    for (int n = 0; n < N; n++) wgt[n] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int w = 1; w <= WB; w++) gemm(w);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
