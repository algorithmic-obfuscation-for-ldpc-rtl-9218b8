// syndrome_unit: column-serial syndrome t' = z'H^T.
//
// Each cycle the hard decisions z' of one block column arrive already rotated
// into check-node order (zp_rows, bit b*Q + r for row r of block row b). The unit
// XORs them into the running syndrome; first_col restarts the sum. The output t
// includes the current column, so on the last column of a pass it is the
// complete syndrome of that pass and can be checked in the same cycle.
// Register updates on the rising edge when col_valid is high.
module syndrome_unit #(
  parameter int H = 635                  // number of rows of H
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         col_valid,
  input  logic         first_col,
  input  logic [H-1:0] zp_rows,
  output logic [H-1:0] t
);
  logic [H-1:0] t_reg;

  assign t = (first_col ? '0 : t_reg) ^ zp_rows;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n)          t_reg <= '0;
    else if (col_valid)  t_reg <= t;

endmodule
