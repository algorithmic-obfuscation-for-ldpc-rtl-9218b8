// stop_check_f2: key-locked stop condition of the first obfuscation scheme.
//
// stop = AND_{i<HK} XNOR(t_i, k_i)  AND  AND_{i>=HK} (t_i == p_i)
// where p = vH^T is the syndrome the modified decoder reaches on convergence.
// The key covers the first HK syndrome bits; the remaining bits are compared
// with the hard-wired p (each term is t_i or NOT t_i). With the right key
// (k = first HK bits of p) decoding stops exactly when t = p; with any other key
// the decoder almost always runs to the last iteration, which cuts throughput.
// Combinational; the function is the paper's.
module stop_check_f2 #(
  parameter int           H  = 635,
  parameter int           HK = 127,
  parameter logic [H-1:0] P  = '0      // p = vH^T
) (
  input  logic [H-1:0]  t,
  input  logic [HK-1:0] k,
  output logic          stop
);
  logic [H-1:0] expect_t;

  always_comb begin
    for (int i = 0; i < H; i++)
      expect_t[i] = (i < HK) ? k[i] : P[i];
    stop = &(~(t ^ expect_t));
  end
endmodule
