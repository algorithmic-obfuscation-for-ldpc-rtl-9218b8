// cnu: check node unit for one row m of H, sliced message passing.
//
// The decoder visits one block column j per clock cycle. Because every row of
// a QC-LDPC matrix with non-zero circulants has exactly one non-zero per block
// column, the CNU receives exactly one v2c message per cycle (u_in). Over a pass
// of KB cycles it accumulates min1, min2, the block-column index idx of min1 and
// the sign product s (min-sum check node processing). On the last column of the
// pass the new results are published to a second register set; during the next
// pass they produce, one column per cycle, the c2v message
//   |v| = alpha * (idx == j ? min2 : min1)
//   sign(v) = p_m xor s xor sign(u of this edge in the previous pass)
// where p_m is bit m of p = vH^T (the (-1)^{p_m} factor of the modified
// min-sum). p_m is a constant of the instance (P_FLIP), i.e. a NOT gate.
//
// Interface: col_valid/col/first_col/last_col come from the controller;
// u_sign_prev is read from the sign memory. c2v is combinational from the
// published registers and col. Registers update on the rising clock edge when
// col_valid is high.
//
// From the paper: the min-sum check node equations and the p_m sign flip.
// This design's choices: alpha = 3/4 (floor), idx stored as block-column
// number, the p_m flip placed on the CNU sign product instead of at the VNU
// inputs (same function, constant per row in a column-serial decoder), and
// a magnitude equal to min1 becoming min2.
module cnu
  import ldpc_pkg::*;
#(
  parameter int KB     = KB_DEF,   // block columns per row (row weight)
  parameter bit P_FLIP = 1'b0      // bit p_m of p = vH^T
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 col_valid,
  input  logic [idx_w(KB)-1:0] col,
  input  logic                 first_col,
  input  logic                 last_col,
  input  msg_t                 u_in,
  input  logic                 u_sign_prev,
  output msg_t                 c2v
);
  localparam int CW = idx_w(KB);

  logic [MAG_W-1:0] cur_min1, cur_min2, prv_min1, prv_min2;
  logic [CW-1:0]    cur_idx, prv_idx;
  logic             cur_s, prv_s;

  logic [MAG_W-1:0] n_min1, n_min2;
  logic [CW-1:0]    n_idx;
  logic             n_s;

  // Running min1/min2/idx/sign update with this cycle's v2c message.
  always_comb begin
    if (first_col) begin
      n_min1 = u_in.mag;
      n_min2 = MAG_MAX;
      n_idx  = col;
      n_s    = u_in.sgn;
    end else begin
      n_min1 = cur_min1;
      n_min2 = cur_min2;
      n_idx  = cur_idx;
      n_s    = cur_s ^ u_in.sgn;
      if (u_in.mag < cur_min1) begin
        n_min2 = cur_min1;
        n_min1 = u_in.mag;
        n_idx  = col;
      end else if (u_in.mag < cur_min2) begin
        n_min2 = u_in.mag;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cur_min1 <= '0; cur_min2 <= '0; cur_idx <= '0; cur_s <= 1'b0;
      prv_min1 <= '0; prv_min2 <= '0; prv_idx <= '0; prv_s <= 1'b0;
    end else if (col_valid) begin
      cur_min1 <= n_min1; cur_min2 <= n_min2; cur_idx <= n_idx; cur_s <= n_s;
      if (last_col) begin
        prv_min1 <= n_min1; prv_min2 <= n_min2; prv_idx <= n_idx; prv_s <= n_s;
      end
    end
  end

  // c2v message for column col from the previous pass's results.
  logic [MAG_W-1:0] sel_mag;
  always_comb begin
    sel_mag = (prv_idx == col) ? prv_min2 : prv_min1;
    // alpha = 3/4: floor(3*m / 4)
    c2v.mag = MAG_W'(({2'b00, sel_mag} + {1'b0, sel_mag, 1'b0}) >> 2);
    c2v.sgn = P_FLIP ^ prv_s ^ u_sign_prev;
  end

endmodule
