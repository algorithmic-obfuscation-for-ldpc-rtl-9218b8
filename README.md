# A QC-LDPC min-sum decoder with a key-locked stop condition

An LDPC decoder corrects errors. That makes it a poor target for conventional
logic locking. If a wrong key flips a check-node sign or a message bit now and
then, the next iterations simply correct the damage, and the locked chip stays
almost as good as the unlocked one. This design locks the decoder where every
iteration depends on it: the **stop condition**, i.e. the test that decides
whether the current hard-decision word is a codeword.

- **Throughput lock (scheme 1).** With a wrong key the stop test almost never
  fires. Every frame then runs to the iteration limit I_max. At typical channel
  conditions that costs about 3x in throughput, while the decoded words stay
  correct.
- **Error-rate lock (scheme 2).** Most wrong keys also make the test fire on many
  wrong syndromes. Decoding then stops early on words that are not codewords, and
  the frame error rate degrades by orders of magnitude.
- **Hidden stop condition.** A secret vector *v* is folded into the decoding
  algorithm. A correctly keyed decoder therefore converges not to the syndrome
  t = 0 but to t = p = vH^T, a random-looking constant. Replacing the lock with
  the textbook zero-syndrome detector gives a decoder that never stops.
  *v* exists in the netlist only as inverters at the inputs and outputs of some
  variable-node units and check-node units.

With the right key the decoder produces exactly the same words, in exactly the
same number of iterations, as an ordinary min-sum decoder. The end-to-end
testbenches check this bit for bit.

The RTL is dimensioned for a (1270, 635) quasi-cyclic code. Its parity-check
matrix H is a 5 x 10 array of 127 x 127 cyclically shifted identity matrices.
Every row has weight 10 and every column weight 5. The iteration limit is 15.

## 1. The modified min-sum algorithm

Plain min-sum starts from the channel LLRs gamma_n and repeats two steps. The
check-node step turns variable-to-check messages u into check-to-variable
messages v. For each row m it takes min1, min2, the position idx of min1 and the
sign product s_m, and sets |v_mn| = alpha * (n == idx ? min2 : min1) and
sign(v_mn) = s_m * sign(u_mn). The variable-node step forms
u_mn = gamma_n + (sum of v_in over i != m) and the a-posteriori sum
gamma~_n = gamma_n + (sum of all v_in). The hard decisions are z_n = sign(gamma~_n),
and decoding stops when t = zH^T equals 0.

The obfuscated decoder runs the same recursion on z' = z xor v, with two changes:

| where | change | hardware |
|---|---|---|
| channel input | sign(gamma'_n) = sign(gamma_n) xor v_n | NOT gate on the channel sign in VNU n |
| check node m | sign(v'_mn) = p_m xor s'_m xor sign(u'_mn), with p = vH^T | NOT gate on the sign product of CNU m |
| output | z_n = z'_n xor v_n | NOT gate on the decision output of VNU n |
| stop | t' = z'H^T compared with p, through the key | stop-check block |

Every message sign of the modified decoder differs from the plain decoder's by
v_n. The magnitudes are unchanged. The extra p_m cancels the change in the sign
product: s'_m = s_m xor p_m, because row m of H picks up p_m = xor of v_n over
the row. So z' = z xor v in every iteration, and t' = t xor p.

Exactness needs care at one point. A sum of exactly zero must not take a fixed
sign, or the symmetry breaks. In this design a zero sum takes the sign of
gamma'_n. That sign flips together with v, so the equivalence holds bit for bit.

v is a 127-bit pattern `V_PAT` repeated over all ten block columns, so that
v_n = V_PAT[n mod 127]. Because the decoder processes one block column at a
time, VNU k always serves bit k of some block column, and its flip is the
constant V_PAT[k]. The resulting p is

    p[b*127 + r] = xor over j = 0..9 of V_PAT[(r + shift(b, j)) mod 127]

It is computed at elaboration time (`calc_p` in `ldpc_decoder_obf`).

## 2. The two key-locked stop checks

The syndrome index is i = 127*b + r, for row r of block row b. h = 635.

**Scheme 1, `stop_check_f2`.** The key k has h_k = 127 bits:

    stop = AND_{i<h_k} (t'_i == k_i)  AND  AND_{i>=h_k} (t'_i == p_i)

The right key is k = p[126:0]. Any wrong key stops only at the one syndrome that
equals it, and only by accident before convergence. The decoder therefore almost
always runs all 15 iterations, while the error rate hardly changes. In the
paper's terms, every wrong key has low corruptibility: it changes the output for
only one input pattern.

**Scheme 2, `stop_check_f4`.** The key is key = {kb, ka}: kb has l_r = 10 bits and
ka has g*l_r = 150 bits. kb sits in the top bits of the port. First the leading
150 syndrome bits are compressed into r, with r_i = xor of t'[15i .. 15i+14]
(`r_map`). The parity of 15 lightly-biased bits is close to a fair coin. Then

    f3   = (r == kb)
    f2   = (t'[149:0] == ka) AND (t'[634:150] == p[634:150])
    fh   = OR_i ( r_i xor (xor of ka[15i .. 15i+14]) )
    stop = f3 AND (f2 OR fh)

The right key is ka = p[149:0] and kb = r(p). A wrong key falls into one of two
classes.

- **Low corruptibility.** The group parities of ka equal kb. Then fh = 0 whenever
  f3 = 1, and the key behaves like scheme 1: slow decoding, correct words.
- **High corruptibility.** The group parities of ka differ from kb. Then the
  decoder stops on every syndrome with r = kb, about one in 2^10 of them, and so
  sometimes on a wrong word. The decoding also usually runs to I_max.

The low-corruptibility keys make the SAT attack take exponentially many queries.
The high-corruptibility ones make any approximate key an attack returns unusable.

Choosing the key:

    scheme 1:  key = p[126:0]
    scheme 2:  key = { r(p) , p[149:0] },   r(p)_i = xor of p[15i .. 15i+14]

The testbench package `tb/ldpc_ref_pkg.sv` computes p and both keys from
`V_PAT` (`calc_p`, `right_key`).

## 3. Architecture: one block column per clock cycle

The decoder uses sliced message passing: each clock cycle processes one of the
10 block columns of H. In every row of a QC matrix with no zero circulants, each
block column holds exactly one non-zero. So every check-node unit sends one
message and receives one message per cycle.

```
          gamma_col (127 LLRs)
               |         +-------------+
               +-------->| channel_mem |  10 x 127 x 5 bit
               |  init   +-------------+
               v            | (later passes)
        +--------------- 127 x vnu ---------------+  <- NOT gates: V_PAT[k]
        |  gamma' + 5 c2v -> 5 v2c, z', z         |
        +-----------------------------------------+
          ^ c2v (column order)      | v2c + z' (column order)        z -> hd_mem -> z[1269:0]
  5 x barrel_shifter (q - s)   5 x barrel_shifter (s)
          | c2v (row order)         v v2c + z' (row order)
        +--------------- 635 x cnu ---------------+  <- NOT gates: p_m
        | running min1/min2/idx/s (this pass)     |<-> sign_mem (v2c signs, 10 x 635 bit)
        | published min1/min2/idx/s (last pass)   |
        +-----------------------------------------+
                            | z' (row order)
                     syndrome_unit -> t' -> stop_check_f2 / f4 <- key
                                                 |
                                           decoder_ctrl (3 states)
```

During the cycle for block column j:

1. Each CNU forms its c2v message for column j from the results it published at
   the end of the previous pass. It also uses the sign of the v2c message it got
   from column j in that pass, read from `sign_mem`.
2. For each block row b, a barrel shifter rotates the 127 c2v messages from row
   order into column order. The shift is (127 - s_bj) mod 127.
3. The 127 VNUs add the channel values, read from `channel_mem` or straight from
   the input during loading, to the 5 incoming messages. They produce 5 v2c
   messages, z' and z.
4. A second barrel shifter per block row rotates the v2c messages back to row
   order by s_bj. The z' bit rides along with each message.
5. The CNUs fold the new message into their running min1/min2/idx/sign. The
   signs go into `sign_mem`, z goes into `hd_mem`, and the row-ordered z' bits
   are XORed into the syndrome.

After column 9 the running results become the published ones. The syndrome is
then complete and goes to the stop check in the same cycle. One iteration
therefore takes exactly 10 cycles.

The first pass over a frame is special. Columns are accepted from the input as
they arrive, and c2v messages are ignored (`init`), so u = gamma' and z' = sign(gamma').
This is the algorithm's initialisation together with its initial codeword check.

`decoder_ctrl` has the three states of a decoder FSM:

- `S_INIT`: load the frame and run the initialisation pass.
- `S_ITER`: run iterations 1..15.
- `S_FINAL`: one cycle with `done` high.

The stop check is sampled at the last column of every pass. If it fires, the
decode ends with `success` = 1. If it has not fired by iteration 15, the decode
ends with `success` = 0.

Unit counts at the default size: 635 `cnu`, 127 `vnu`, 10 `barrel_shifter`
(127 elements each), 6350 bits of sign memory, 6350 bits of channel memory,
1270 bits of hard-decision memory. The CNU, VNU and barrel-shifter counts are the
ones of the reference architecture. The shifters are built as 7 log-stages of
fixed rotations by 2^k mod 127.

## 4. Number formats and code details

- **Messages.** Messages are 5-bit sign-magnitude (`ldpc_pkg::msg_t`). The sign
  bit is the hard bit the message votes for: 1 means bit '1', which is a positive
  LLR log(P(1)/P(0)). The magnitude has 4 bits and saturates at 15.
- **VNU arithmetic.** The VNU converts to two's complement, sums in 8 bits, which
  cannot overflow (6 x 15 < 128), and converts back.
- **Scaling.** alpha = 3/4, applied on the CNU output as floor(3m/4).
- **Ties.** In the CNU, a magnitude equal to min1 becomes min2, and idx keeps the
  first minimum. In the VNU, a zero sum takes the sign of gamma' (see section 1).
- **Circulant shifts.** The shifts of the reference code are not published. This
  RTL uses s_bj = ((b+1)(j+1)) mod q (`ldpc_pkg::shift_of`), an array-code
  construction that has no 4-cycles when q is prime. Row r of block row b
  connects to bit j*q + (r + s_bj) mod q. Swapping in another code only needs a
  new `shift_of`.
- **Rate.** With no zero circulants, every block row of H sums to the all-ones
  vector, so H has rank at most 631. The "(1270, 635)" label is therefore
  nominal: a code of this shape has dimension of at least 639. The decoder does
  not depend on this.

## 5. Interface and timing (`ldpc_decoder_obf`)

| port | dir | width | meaning |
|---|---|---|---|
| clk, rst_n | in | 1 | clock; asynchronous active-low reset |
| key | in | 160 (scheme 2) / 127 (scheme 1) | obfuscation key |
| in_valid / in_ready | in / out | 1 | a block column is offered / accepted (`in_ready` only in `S_INIT`) |
| gamma_col | in | 127 x msg_t | LLRs of bits j*127 .. j*127+126, column j = j-th accepted beat |
| done | out | 1 | one-cycle pulse when a frame has ended |
| success | out | 1 | the stop condition fired (0 = gave up after I_max) |
| iters | out | 4 | iterations run (0 = stopped at the initial check) |
| z | out | 1270 | decoded word, bit n = codeword bit n, v already removed |

Timing:

- A frame is offered as 10 consecutive beats.
- If the beats are back to back, `done` is high in the cycle that starts
  10 x (iters + 1) clock edges after the first beat was accepted.
- `success`, `iters` and `z` are valid while `done` is high, and stay valid until
  the next frame writes its first decisions.
- Gaps in the input simply stall the initialisation pass.
- Loading and decoding do not overlap: a frame is accepted only after the
  previous one is done.

Parameters, with defaults:

- Q = 127, JB = 5, KB = 10: circulant size, block rows, block columns.
- IMAX = 15.
- SCHEME = 2.
- HK = 127 (scheme 1).
- G = 15, LR = 10 (scheme 2).
- V_PAT: the secret pattern.

Message widths are package constants.

## 6. What comes from the source and what is this design's own

The following follow the published scheme: the modified min-sum algorithm
(v on inputs and outputs, p_m on check-node signs), the stop functions f2 and f4
and their mapping r, and the key sizes (h_k = 127, g = 15, l_r = 10). So do
I_max = 15, the code shape (5 x 10 circulants of 127), the sliced-message-passing
organisation with 635 CNUs, 127 VNUs and 2 x 5 barrel shifters, the VNU built
around sign-magnitude / two's-complement converters, and the three-state
controller.

The following are this design's choices:

- the circulant shift values;
- the message widths, alpha and the tie rules;
- the pattern V_PAT, and v repeated every 127 bits (the source allows this form);
- placing the p_m inversion on the CNU sign product. The source describes NOT
  gates at the VNU inputs. With one block column per cycle, the flip a VNU input
  would need changes from column to column, while at the CNU it is one constant
  per row. The function is the same.
- the whole column datapath combinational within one cycle, with no pipelining;
- the frame interface, the parallel z output, and idx stored as a block-column
  number;
- both schemes in one RTL, chosen by a parameter.

Not included:

- Key storage. The key is a port; the tamper-proof memory that would hold it
  is outside this RTL.
- The published reference decoder's exact code and quantisation, which are
  unknown. Error-rate curves from this RTL will not match the published ones
  point for point.

## 7. Files

`rtl/`:

| file | contents |
|---|---|
| ldpc_pkg.sv | message types, default sizes, `shift_of`, default `V_PAT_DEF` |
| ldpc_decoder_obf.sv | top level |
| cnu.sv, vnu.sv | check and variable node units |
| barrel_shifter.sv | cyclic rotator between row and column order |
| channel_mem.sv, sign_mem.sv, hd_mem.sv | channel LLRs, v2c signs, decoded word |
| syndrome_unit.sv | column-serial t' = z'H^T |
| stop_check_f2.sv, r_map.sv, stop_check_f4.sv | key-locked stop conditions |
| decoder_ctrl.sv | three-state controller |

`tb/` has one self-checking testbench per unit, `tb_<unit>.sv`, plus:

- **`tb_ldpc_decoder_obf.sv`** uses a reduced code (q = 31, 310-bit frames,
  scheme 1 with h_k = 31 and scheme 2 with g = 3, l_r = 4) and runs 36 frames
  through both schemes. Each frame uses the right key, a low-corruptibility wrong
  key or a high-corruptibility wrong key. Every result is compared with the
  bit-exact reference in `ldpc_ref_pkg.sv`, a plain min-sum decoder that knows
  nothing of v. The test also requires each behaviour to occur at least once:
  stop at the initial check, convergence, decoding failure, a wrong key forcing
  I_max, and a premature stop with a high-corruptibility key.
- **`tb_ldpc_decoder_obf_full.sv`** does the same at the default size, scheme 2,
  with 9 frames.
- **`tb_ldpc_workload.sv`** is the throughput experiment at the default size:
  120 random frames over a binary symmetric channel with 2% bit errors. Each
  frame is decoded by a scheme-1 and a scheme-2 decoder, both checked against
  the reference. The key classes are the right key, a low-corruptibility wrong
  key, and (scheme 2) high-corruptibility keys whose kb part is 3 or 9 bits
  away from the right one with a random ka part. The test prints the average
  iterations and frame errors for each class, and requires a wrong key to cost
  at least three times the clock cycles of the right key. A typical run gives
  2.7 iterations with the right key and 15.0 with every wrong key. Premature
  stops are rare at l_r = 10 (at most 2^-10 per iteration), so frame error
  rates of 1e-4 and below need far more frames than a simulation can run here.

Every testbench prints `TB_RESULT checks=N failures=M`.

Running with Verilator 5:

    verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
        rtl/ldpc_pkg.sv tb/ldpc_ref_pkg.sv tb/tb_ldpc_decoder_obf.sv \
        --top-module tb_ldpc_decoder_obf -o sim && obj_dir/sim

The other testbenches build the same way; only `tb/ldpc_ref_pkg.sv` is needed
by the three decoder-level ones. The full-size build takes about three minutes
(about nine for `tb_ldpc_workload`, which holds two full-size decoders); the
simulations take seconds.
