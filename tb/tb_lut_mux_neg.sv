// tb_lut_mux_neg -- self-checking test of one MUX PE.
//
// Builds the symmetrized table of random activation groups and checks, for
// every one of the 2^K {-1,+1} weight patterns after offline remapping, that
// the PE returns the plain dot product. Also checks that the most negative
// entry negates without overflow.
module tb_lut_mux_neg;
  import lut_tc_tb_pkg::*;

  localparam int K = 4;
  localparam int LUT_BIT = 8;

  logic signed [LUT_BIT-1:0] tbl [2**(K-1)];
  logic        [K-1:0]       wbits;
  logic signed [LUT_BIT:0]   val;

  int checks = 0, failures = 0;

  lut_mux_neg #(.K(K), .LUT_BIT(LUT_BIT)) dut (.table_i(tbl), .wbits_i(wbits), .val_o(val));

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    vec_t a, q;
    logic [KMAX-1:0] p;
    longint exp_v;
    for (int t = 0; t < 200; t++) begin
      for (int i = 0; i < KMAX; i++) a[i] = rand_range(-31, 31);
      for (int j = 0; j < 2**(K-1); j++) tbl[j] = LUT_BIT'(table_entry(a, K, j));
      for (int pat = 0; pat < 2**K; pat++) begin
        for (int i = 0; i < KMAX; i++) q[i] = (pat >> i) & 1;
        p = remap_plane(q, K, 0);
        wbits = p[K-1:0];
        #1;
        exp_v = ref_dot(a, q, K, 1);
        checks++;
        if (longint'(val) != exp_v) begin
          failures++;
          if (failures < 10) $display("FAIL pat=%0d val=%0d exp=%0d", pat, val, exp_v);
        end
      end
    end
    // Most negative entry, negated.
    for (int j = 0; j < 2**(K-1); j++) tbl[j] = -8'sd128;
    wbits = 4'b1000;
    #1;
    checks++;
    if (val != 9'sd128) begin failures++; $display("FAIL negate -128 gave %0d", val); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
