// lut_mux_neg -- one MUX processing element of the LUT array.
//
// The table of a group of K activations holds only the 2^(K-1) entries whose
// top activation enters with sign -1 (table symmetrization). Entry j is
//   T[j] = -a[K-1] + sum_{k<K-1} (2*j[k]-1) * a[k].
// The grouped weight bit-plane w (K bits, already remapped offline) selects
// entry w[K-2:0]; when w[K-1] is 1 the entry is negated:
//   val = w[K-1] ? -T[w[K-2:0]] : T[w[K-2:0]].
// Because the bitwise NOT of the select bits was applied to the weights
// offline, no inverter sits on the select path. This is the published
// MUX + NEG arrangement; the extra output bit (LUT_BIT+1), which keeps the
// negation of the most negative entry exact, is this implementation's choice.
//
// Purely combinational.
module lut_mux_neg #(
  parameter int unsigned K       = 4,
  parameter int unsigned LUT_BIT = 8
) (
  input  logic signed [LUT_BIT-1:0] table_i [2**(K-1)],
  input  logic        [K-1:0]       wbits_i,
  output logic signed [LUT_BIT:0]   val_o
);

  logic signed [LUT_BIT:0] sel;

  always_comb begin
    sel   = (LUT_BIT+1)'(table_i[wbits_i[K-2:0]]);
    val_o = wbits_i[K-1] ? -sel : sel;
  end

endmodule
