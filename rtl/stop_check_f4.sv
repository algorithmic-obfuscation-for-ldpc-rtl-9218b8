// stop_check_f4: key-locked stop condition of the second obfuscation scheme.
//
// stop = f3(r, kb) AND ( f2(t, ka) OR fh(r, ka) )
//   r  = group parities of the first G*LR syndrome bits (r_map)
//   f3 = (r == kb)
//   f2 = first G*LR bits of t equal ka and all other bits equal p = vH^T
//   fh = OR_i ( r_i xor ka[i*G] xor ... xor ka[i*G+G-1] )
// The right key is kb = r(p), ka = first G*LR bits of p. A wrong key whose ka
// group parities equal kb is a low-corruptibility key (stops at one syndrome);
// any other wrong key stops whenever r == kb, i.e. prematurely on many
// syndromes, and so also corrupts the decoded output. Combinational; the
// function is the paper's.
module stop_check_f4 #(
  parameter int           H  = 635,
  parameter int           G  = 15,
  parameter int           LR = 10,
  parameter logic [H-1:0] P  = '0
) (
  input  logic [H-1:0]    t,
  input  logic [LR-1:0]   kb,
  input  logic [G*LR-1:0] ka,
  output logic            stop
);
  logic [LR-1:0] r, ka_par;
  logic          f2, f3, fh;

  r_map #(.G(G), .LR(LR)) u_rmap (.t(t[G*LR-1:0]), .r(r));

  stop_check_f2 #(.H(H), .HK(G*LR), .P(P)) u_f2 (.t(t), .k(ka), .stop(f2));

  always_comb begin
    for (int i = 0; i < LR; i++) ka_par[i] = ^ka[i*G +: G];
    f3   = (r == kb);
    fh   = |(r ^ ka_par);
    stop = f3 & (f2 | fh);
  end
endmodule
