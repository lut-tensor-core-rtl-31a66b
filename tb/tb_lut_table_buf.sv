// tb_lut_table_buf -- self-checking test of the table register storage.
//
// Checks the reset value, that every entry of every table is captured on a
// load edge, and that the contents hold while load_i is low and the inputs
// change.
module tb_lut_table_buf;
  localparam int M = 2, K = 4, LUT_BIT = 8, E = 2**(K-1);

  logic clk = 0, rst_n = 0, load = 0;
  logic signed [LUT_BIT-1:0] tin  [M][E];
  logic signed [LUT_BIT-1:0] tout [M][E];
  logic signed [LUT_BIT-1:0] ref_t [M][E];

  int checks = 0, failures = 0;

  lut_table_buf #(.M(M), .K(K), .LUT_BIT(LUT_BIT)) dut (
    .clk(clk), .rst_n(rst_n), .load_i(load), .tables_i(tin), .tables_o(tout));

  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic compare(string what);
    for (int m = 0; m < M; m++) for (int e = 0; e < E; e++) begin
      checks++;
      if (tout[m][e] != ref_t[m][e]) begin
        failures++;
        if (failures < 10) $display("FAIL %s m=%0d e=%0d got=%0d exp=%0d", what, m, e, tout[m][e], ref_t[m][e]);
      end
    end
  endtask

  initial begin
    for (int m = 0; m < M; m++) for (int e = 0; e < E; e++) begin tin[m][e] = 8'sh55; ref_t[m][e] = '0; end
    #1;
    compare("reset");
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 200; t++) begin
      @(negedge clk);
      for (int m = 0; m < M; m++) for (int e = 0; e < E; e++) tin[m][e] = LUT_BIT'($urandom);
      load = ($urandom_range(1) == 1);
      if (load) ref_t = tin;
      @(negedge clk);
      load = 0;
      compare("after edge");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
