// r_map: maps the first G*LR syndrome bits onto LR near-uniform bits.
//
// r_i = t[i*G] xor t[i*G+1] xor ... xor t[i*G+G-1]. Syndrome bits of a lightly
// corrupted word are mostly 0; the parity of a group of G of them is close to
// equiprobable, which gives the second obfuscation scheme's wrong keys high
// corruptibility. G = 15 makes Pr{r_i = 1} about 0.5 for the reference code at
// input BER 0.025. Combinational; follows the paper's mapping exactly.
module r_map #(
  parameter int G  = 15,
  parameter int LR = 10
) (
  input  logic [G*LR-1:0] t,
  output logic [LR-1:0]   r
);
  always_comb
    for (int i = 0; i < LR; i++) r[i] = ^t[i*G +: G];
endmodule
