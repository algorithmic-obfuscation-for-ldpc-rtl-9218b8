// vnu: variable node unit for one column n, modified min-sum (v folded in).
//
// Inputs are the channel LLR gamma_n and the JB c2v messages of the column, all
// sign-magnitude. The unit converts them to two's complement, forms the
// a-posteriori sum  total = gamma'_n + sum_i v_{i,n}  and the extrinsic v2c
// messages  u_{m,n} = total - v_{m,n}, and converts these back to sign-magnitude
// with the magnitude saturated to MAG_MAX. The hard decision is z'_n = sign(total).
//
// The secret vector v enters only as the constant V_FLIP = v_n: a NOT gate on the
// channel sign (gamma'_n = gamma_n with its sign xor v_n) and one on the output,
// z_n = z'_n xor v_n. With init high (initialisation pass) the c2v inputs are
// ignored, so u = gamma' and z' = sign(gamma').
//
// A zero sum takes the sign of gamma'_n; this keeps the decoder with any v
// exactly equivalent to the decoder with v = 0. Purely combinational.
//
// From the paper: the VNU equations and the NOT gates for v. This design's
// choices: widths (4-bit magnitudes, 8-bit sums) and the zero-sum rule.
module vnu
  import ldpc_pkg::*;
#(
  parameter int JB     = JB_DEF,   // column weight
  parameter bit V_FLIP = 1'b0      // bit v_n of the secret vector
) (
  input  msg_t            gamma,
  input  logic            init,
  input  msg_t [JB-1:0]   c2v,
  output msg_t [JB-1:0]   u,
  output logic            zp,
  output logic            z
);
  typedef logic signed [SUM_W-1:0] sum_t;

  function automatic sum_t to_tc(input msg_t m);
    sum_t mag;
    mag = sum_t'({{(SUM_W-MAG_W){1'b0}}, m.mag});
    return m.sgn ? mag : -mag;
  endfunction

  function automatic msg_t to_sm(input sum_t x, input logic tie_sgn);
    msg_t r;
    sum_t a;
    a = (x < 0) ? -x : x;
    r.sgn = (x > 0) ? 1'b1 : ((x < 0) ? 1'b0 : tie_sgn);
    r.mag = (a > sum_t'(MAG_MAX)) ? MAG_MAX : a[MAG_W-1:0];
    return r;
  endfunction

  logic g_sgn;
  sum_t total;
  sum_t c2v_tc [JB];

  always_comb begin
    g_sgn = gamma.sgn ^ V_FLIP;                  // NOT gate for v_n
    total = to_tc('{sgn: g_sgn, mag: gamma.mag});
    for (int i = 0; i < JB; i++) begin
      c2v_tc[i] = init ? '0 : to_tc(c2v[i]);
      total     = total + c2v_tc[i];
    end
    for (int i = 0; i < JB; i++)
      u[i] = to_sm(total - c2v_tc[i], g_sgn);
    zp = (total > 0) ? 1'b1 : ((total < 0) ? 1'b0 : g_sgn);
    z  = zp ^ V_FLIP;                            // NOT gate for v_n
  end

endmodule
