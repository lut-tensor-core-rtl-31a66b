// tb_weight_buf -- self-checking test of the grouped binary weight storage.
//
// Loads random weights for all bit-planes, then steps the plane select over
// every plane and checks each group's K-bit plane; checks that contents hold
// while load_i is low.
module tb_weight_buf;
  localparam int N = 8, K = 4, W_BIT_MAX = 4, SH_W = 2;

  logic clk = 0, rst_n = 0, load = 0;
  logic [W_BIT_MAX-1:0][K-1:0] win  [N];
  logic [W_BIT_MAX-1:0][K-1:0] refw [N];
  logic [SH_W-1:0]             sel = '0;
  logic [K-1:0]                wout [N];

  int checks = 0, failures = 0;

  weight_buf #(.N(N), .K(K), .W_BIT_MAX(W_BIT_MAX)) dut (
    .clk(clk), .rst_n(rst_n), .load_i(load), .wgt_i(win), .sel_i(sel), .wplane_o(wout));

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < N; n++) begin win[n] = '0; refw[n] = '0; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 200; t++) begin
      @(negedge clk);
      for (int n = 0; n < N; n++) win[n] = (W_BIT_MAX*K)'($urandom);
      load = ($urandom_range(3) != 0);
      if (load) refw = win;
      @(negedge clk);
      load = 0;
      for (int n = 0; n < N; n++) win[n] = (W_BIT_MAX*K)'($urandom);
      for (int b = 0; b < W_BIT_MAX; b++) begin
        sel = SH_W'(b);
        #1;
        for (int n = 0; n < N; n++) begin
          checks++;
          if (wout[n] != refw[n][b]) begin
            failures++;
            if (failures < 10) $display("FAIL n=%0d plane=%0d got=%h exp=%h", n, b, wout[n], refw[n][b]);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
