// lut_table_buf -- register storage for the M tables of one LMMA tile.
//
// Holds M x 2^(K-1) entries of LUT_BIT bits (M x 2^(K-1) x LUT_BIT bits in
// all, 128 at the default M2K4 with INT8 entries). All tables are captured on
// the rising edge where load_i is high and held otherwise; tables_o is the
// register contents, broadcast to the rows of the array. The size follows
// the published table-size formula; one-cycle parallel loading is this
// implementation's choice. Async active-low reset clears the entries.
module lut_table_buf #(
  parameter int unsigned M       = 2,
  parameter int unsigned K       = 4,
  parameter int unsigned LUT_BIT = 8
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      load_i,
  input  logic signed [LUT_BIT-1:0] tables_i [M][2**(K-1)],
  output logic signed [LUT_BIT-1:0] tables_o [M][2**(K-1)]
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int m = 0; m < M; m++)
        for (int e = 0; e < 2**(K-1); e++)
          tables_o[m][e] <= '0;
    end else if (load_i) begin
      tables_o <= tables_i;
    end
  end

endmodule
