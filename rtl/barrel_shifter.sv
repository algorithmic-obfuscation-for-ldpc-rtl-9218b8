// barrel_shifter: cyclic rotation of N elements of DW bits by a run-time amount.
//
// dout[i] = din[(i + amt) mod N]. It routes messages between check-node order and
// variable-node order for one q x q shifted-identity sub-matrix: with shift s,
// v2c messages (column order) reach row order with amt = s, and c2v messages
// (row order) reach column order with amt = (N - s) mod N.
// Built from $clog2(N) stages; stage k rotates by 2^k mod N when amt[k] is set,
// so N need not be a power of two. Combinational. amt must be below N.
module barrel_shifter #(
  parameter int N  = 127,
  parameter int DW = 6
) (
  input  logic [N-1:0][DW-1:0]      din,
  input  logic [$clog2(N)-1:0]      amt,
  output logic [N-1:0][DW-1:0]      dout
);
  localparam int SW = $clog2(N);

  logic [N-1:0][DW-1:0] stage [SW+1];

  assign stage[0] = din;

  for (genvar k = 0; k < SW; k++) begin : g_stage
    localparam int STEP = (1 << k) % N;
    for (genvar i = 0; i < N; i++) begin : g_el
      assign stage[k+1][i] = amt[k] ? stage[k][(i + STEP) % N] : stage[k][i];
    end
  end

  assign dout = stage[SW];

endmodule
