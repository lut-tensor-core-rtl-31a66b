// lut_unit -- LUT unit with bit-serial partial-sum accumulation.
//
// A lut_mux_neg looks up the dot product of one activation group with one
// {-1,+1} weight bit-plane. A multi-bit weight q (W bits, unsigned) is used
// as q' = 2q - (2^W - 1) = sum_b 2^b * (2*q[b] - 1), so bit-plane b's
// result is shifted left by b and added into the accumulator; one bit-plane
// is handled per cycle. This is the published MUX / NEG / shifter / adder /
// register unit; processing the planes least significant first, and
// loading the accumulator with the instruction's Accum operand, are this
// implementation's choices.
//
// Timing: on a rising edge with init_i high the accumulator takes acc_i;
// otherwise with en_i high it takes acc + (val << shamt_i). acc_o is the
// register. init_i has priority over en_i. Async active-low reset to 0.
module lut_unit #(
  parameter int unsigned K         = 4,
  parameter int unsigned LUT_BIT   = 8,
  parameter int unsigned W_BIT_MAX = 4,
  parameter int unsigned ACC_BIT   = 32,
  localparam int unsigned SH_W     = lut_tc_pkg::plane_idx_bits(W_BIT_MAX)
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      init_i,
  input  logic                      en_i,
  input  logic        [SH_W-1:0]    shamt_i,
  input  logic signed [LUT_BIT-1:0] table_i [2**(K-1)],
  input  logic        [K-1:0]       wbits_i,
  input  logic signed [ACC_BIT-1:0] acc_i,
  output logic signed [ACC_BIT-1:0] acc_o
);

  logic signed [LUT_BIT:0]   val;
  logic signed [ACC_BIT-1:0] shifted;

  lut_mux_neg #(.K(K), .LUT_BIT(LUT_BIT)) u_mux (
    .table_i (table_i),
    .wbits_i (wbits_i),
    .val_o   (val)
  );

  // Shifter: << bit-plane index.
  always_comb shifted = ACC_BIT'(val) <<< shamt_i;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)      acc_o <= '0;
    else if (init_i) acc_o <= acc_i;
    else if (en_i)   acc_o <= acc_o + shifted;
  end

endmodule
