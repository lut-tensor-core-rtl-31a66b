// weight_buf -- grouped binary weight storage with bit-plane selection.
//
// Holds N grouped weights of K x W_BIT_MAX bits each (K x N x W_BIT bits, the
// published formula; 1024 bits at N64K4 with 4-bit weights). wgt_i[n][b] is
// bit-plane b of group n: the K remapped bits of plane b. All planes are
// captured on a rising edge with load_i high. wplane_o presents plane sel_i
// of every group combinationally; stepping sel_i from 0 to W_BIT-1 feeds the
// array one plane per cycle (bit-serial). The storage layout is this
// implementation's choice. Async active-low reset clears the storage.
module weight_buf #(
  parameter int unsigned N         = 64,
  parameter int unsigned K         = 4,
  parameter int unsigned W_BIT_MAX = 4,
  localparam int unsigned SH_W     = lut_tc_pkg::plane_idx_bits(W_BIT_MAX)
) (
  input  logic                            clk,
  input  logic                            rst_n,
  input  logic                            load_i,
  input  logic [W_BIT_MAX-1:0][K-1:0]     wgt_i    [N],
  input  logic [SH_W-1:0]                 sel_i,
  output logic [K-1:0]                    wplane_o [N]
);

  logic [W_BIT_MAX-1:0][K-1:0] wgt_q [N];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int n = 0; n < N; n++) wgt_q[n] <= '0;
    end else if (load_i) begin
      wgt_q <= wgt_i;
    end
  end

  always_comb begin
    for (int n = 0; n < N; n++) begin
      wplane_o[n] = (32'(sel_i) < W_BIT_MAX) ? wgt_q[n][sel_i] : '0;
    end
  end

endmodule
