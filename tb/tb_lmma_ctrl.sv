// tb_lmma_ctrl -- self-checking test of the LMMA sequencer.
//
// Issues legal instructions of every weight width and checks the control
// sequence cycle by cycle: load_o exactly on the accepting edge, then W_BIT
// cycles of en_o with shamt_o = 0..W_BIT-1, then out_valid W_BIT+1 cycles
// after acceptance, held under back-pressure. Issues illegal instructions
// (wrong shape, too many weight bits, non-INT32 accumulation) and checks
// that they complete at once with err_o set and no en_o cycle. Also checks
// back-to-back issue in the cycle a result is taken.
module tb_lmma_ctrl;
  import lut_tc_pkg::*;

  localparam int M = 2, N = 64, K = 4, W_BIT_MAX = 4, SH_W = 2;

  logic clk = 0, rst_n = 0, in_valid = 0, out_ready = 0;
  logic in_ready, load, en, out_valid, err;
  logic [SH_W-1:0] shamt;
  lmma_instr_t instr;

  int checks = 0, failures = 0;

  lmma_ctrl #(.M(M), .N(N), .K(K), .W_BIT_MAX(W_BIT_MAX)) dut (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .in_ready(in_ready), .instr_i(instr),
    .load_o(load), .en_o(en), .shamt_o(shamt), .out_valid(out_valid), .out_ready(out_ready),
    .err_o(err));

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_eq(int got, int exp_v, string what);
    checks++;
    if (got != exp_v) begin
      failures++;
      if (failures < 20) $display("FAIL %s got=%0d exp=%0d at %0t", what, got, exp_v, $time);
    end
  endtask

  function automatic lmma_instr_t mk(int m, int n, int k, int w, acc_dtype_e acc);
    lmma_instr_t i;
    i.m = 8'(m); i.n = 8'(n); i.k = 8'(k);
    i.a_dtype = A_FP16;
    i.w_dtype = w_dtype_e'(3'(w));
    i.accum_dtype = acc; i.o_dtype = ACC_INT32;
    return i;
  endfunction

  // Issue one instruction (sampled at negedge) and follow it to its result.
  // stall: cycles to hold out_ready low once out_valid is up.
  task automatic run(lmma_instr_t i, int exp_w, bit exp_err, int stall);
    int lat;
    @(negedge clk);
    instr = i; in_valid = 1; out_ready = 0;
    #1;
    expect_eq(int'(in_ready), 1, "ready when idle");
    expect_eq(int'(load), 1, "load on accept");
    @(negedge clk);
    in_valid = 0;
    lat = 1;
    for (int b = 0; b < exp_w; b++) begin
      expect_eq(int'(en), 1, "en during run");
      expect_eq(int'(shamt), b, "shift amount");
      expect_eq(int'(out_valid), 0, "no early valid");
      expect_eq(int'(in_ready), 0, "busy");
      @(negedge clk);
      lat++;
    end
    expect_eq(int'(en), 0, "en off after run");
    expect_eq(int'(out_valid), 1, "valid");
    expect_eq(lat, exp_w + 1, "latency");
    expect_eq(int'(err), int'(exp_err), "err flag");
    for (int s = 0; s < stall; s++) begin
      @(negedge clk);
      expect_eq(int'(out_valid), 1, "valid held under stall");
    end
    out_ready = 1;
    @(negedge clk);
    out_ready = 0;
    expect_eq(int'(out_valid), 0, "valid dropped");
  endtask

  initial begin
    instr = mk(M, N, K, 1, ACC_INT32);
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 40; t++) begin
      int w;
      w = 1 + (t % W_BIT_MAX);
      run(mk(M, N, K, w, ACC_INT32), w, 0, t % 3);
    end
    run(mk(M, 32, K, 2, ACC_INT32), 0, 1, 1);   // wrong N
    run(mk(M, N, 8, 2, ACC_INT32), 0, 1, 0);    // wrong K
    run(mk(M, N, K, 5, ACC_INT32), 0, 1, 0);    // 5-bit weights
    run(mk(M, N, K, 0, ACC_INT32), 0, 1, 0);    // 0-bit weights
    run(mk(M, N, K, 2, ACC_FP32), 0, 1, 2);     // FP accumulation
    // Back-to-back: accept a new one in the cycle the result is taken.
    @(negedge clk);
    instr = mk(M, N, K, 3, ACC_INT32); in_valid = 1;
    @(negedge clk);
    instr = mk(M, N, K, 2, ACC_INT32);
    while (!out_valid) @(negedge clk);
    out_ready = 1;
    #1;
    expect_eq(int'(in_ready), 1, "ready while result taken");
    expect_eq(int'(load), 1, "back-to-back load");
    @(negedge clk);
    in_valid = 0; out_ready = 0;
    expect_eq(int'(en), 1, "second instr runs");
    expect_eq(int'(shamt), 0, "second instr plane 0");
    @(negedge clk); @(negedge clk);
    expect_eq(int'(out_valid), 1, "second instr done after 2 planes");
    out_ready = 1;
    @(negedge clk);
    out_ready = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
