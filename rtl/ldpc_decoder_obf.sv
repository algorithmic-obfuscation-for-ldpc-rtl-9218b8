// ldpc_decoder_obf: obfuscated sliced-message-passing min-sum QC-LDPC decoder.
//
// The decoder runs the modified min-sum algorithm in which a secret vector v is
// xored onto the received hard decisions and every check node's sign product is
// flipped by p_m, p = vH^T. It converges to c xor v, returns c after removing v,
// and its correct stop condition becomes t' = z'H^T == p instead of t == 0. The
// stop condition is locked by the key:
//   SCHEME 1: f2(t', key)                   key = HK bits
//   SCHEME 2: f4(t', [kb || ka])            key = LR + G*LR bits, kb on top
// With the right key the decoder behaves exactly as an ordinary min-sum decoder.
// With a wrong key it runs to IMAX iterations (throughput loss) or, for the
// high-corruptibility keys of scheme 2, also stops on a wrong word.
//
// Architecture: one block column of H per clock cycle. JB*Q CNUs hold the
// compressed check node state, Q VNUs process the Q columns of the current block
// column, JB barrel shifters route c2v messages from row to column order and JB
// route v2c messages (plus z') back. The secret v (pattern V_PAT repeated every Q
// bits) appears only as NOT gates in the VNUs; p only as NOT gates in the CNUs
// and as the constant part of the stop check.
//
// Interface: a frame is offered as KB block columns, column j on gamma_col
// (element k = channel LLR of bit j*Q+k, sign-magnitude, sign 1 = bit '1') while
// in_valid && in_ready. done pulses one cycle when decoding has ended; z, success
// and iters are then valid and hold until the next frame ends (z is rewritten
// while the next frame is decoded). Timing: KB cycles per iteration, done comes
// one cycle after the last column of the last iteration.
//
// From the paper: the algorithm, the unit counts (635 CNUs, 127 VNUs, 2x5
// 127-input barrel shifters), both stop check functions and their sizes. This
// design's choices: circulant shifts, message widths, alpha = 3/4, the secret
// pattern, the single-cycle column datapath and the frame interface.
module ldpc_decoder_obf
  import ldpc_pkg::*;
#(
  parameter int             Q      = Q_DEF,
  parameter int             JB     = JB_DEF,
  parameter int             KB     = KB_DEF,
  parameter int             IMAX   = IMAX_DEF,
  parameter int             SCHEME = 2,
  parameter int             HK     = 127,
  parameter int             G      = 15,
  parameter int             LR     = 10,
  parameter logic [Q-1:0]   V_PAT  = V_PAT_DEF[Q-1:0],
  localparam int            H      = JB * Q,
  localparam int            N      = KB * Q,
  localparam int            KEY_W  = (SCHEME == 1) ? HK : LR + G * LR,
  localparam int            IW     = idx_w(IMAX + 1)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [KEY_W-1:0] key,
  input  logic             in_valid,
  output logic             in_ready,
  input  msg_t [Q-1:0]     gamma_col,
  output logic             done,
  output logic             success,
  output logic [IW-1:0]    iters,
  output logic [N-1:0]     z
);
  localparam int CW = idx_w(KB);
  localparam int SW = $clog2(Q);

  // p = vH^T for v = V_PAT repeated over all block columns.
  function automatic logic [H-1:0] calc_p();
    logic [H-1:0] p;
    p = '0;
    for (int b = 0; b < JB; b++)
      for (int r = 0; r < Q; r++)
        for (int j = 0; j < KB; j++)
          p[b*Q + r] ^= V_PAT[(r + shift_of(b, j, Q)) % Q];
    return p;
  endfunction

  localparam logic [H-1:0] P = calc_p();

  // ---------------------------------------------------------------- control
  logic          col_valid, init_pass, first_col, last_col, stop;
  logic [CW-1:0] col;

  decoder_ctrl #(.KB(KB), .IMAX(IMAX)) u_ctrl (
    .clk, .rst_n, .in_valid, .in_ready, .stop,
    .col_valid, .col, .init_pass, .first_col, .last_col,
    .done, .success, .iters
  );

  // ------------------------------------------------------- shift amount ROM
  logic [SW-1:0] sh_tab  [JB][KB];
  logic [SW-1:0] amt_v2c [JB];
  logic [SW-1:0] amt_c2v [JB];

  for (genvar b = 0; b < JB; b++) begin : g_tab
    for (genvar j = 0; j < KB; j++) begin : g_col
      assign sh_tab[b][j] = SW'(shift_of(b, j, Q));
    end
    assign amt_v2c[b] = sh_tab[b][col];
    assign amt_c2v[b] = (sh_tab[b][col] == '0) ? '0 : SW'(Q) - sh_tab[b][col];
  end

  // --------------------------------------------------------------- memories
  msg_t [Q-1:0] gamma_rd, gamma_cur;

  channel_mem #(.Q(Q), .KB(KB)) u_chan (
    .clk, .we(col_valid & init_pass), .waddr(col), .wdata(gamma_col),
    .raddr(col), .rdata(gamma_rd)
  );

  assign gamma_cur = init_pass ? gamma_col : gamma_rd;

  logic [H-1:0] sgn_prev, sgn_new;

  sign_mem #(.WIDTH(H), .KB(KB)) u_sgn (
    .clk, .we(col_valid), .addr(col), .wdata(sgn_new), .rdata(sgn_prev)
  );

  logic [Q-1:0] z_col, zp_col;

  hd_mem #(.Q(Q), .KB(KB)) u_hd (
    .clk, .rst_n, .we(col_valid), .waddr(col), .wdata(z_col), .z
  );

  // ------------------------------------------------- CNUs and c2v routing
  msg_t [Q-1:0] c2v_row [JB];
  msg_t [Q-1:0] c2v_col [JB];
  v2c_t [Q-1:0] v2c_col [JB];
  v2c_t [Q-1:0] v2c_row [JB];
  logic [H-1:0] zp_rows;

  for (genvar b = 0; b < JB; b++) begin : g_row
    for (genvar r = 0; r < Q; r++) begin : g_cnu
      cnu #(.KB(KB), .P_FLIP(P[b*Q + r])) u_cnu (
        .clk, .rst_n, .col_valid, .col, .first_col, .last_col,
        .u_in       (v2c_row[b][r].m),
        .u_sign_prev(sgn_prev[b*Q + r]),
        .c2v        (c2v_row[b][r])
      );
      assign sgn_new[b*Q + r] = v2c_row[b][r].m.sgn;
      assign zp_rows[b*Q + r] = v2c_row[b][r].zp;
    end

    barrel_shifter #(.N(Q), .DW(MSG_W)) u_c2v_sh (
      .din(c2v_row[b]), .amt(amt_c2v[b]), .dout(c2v_col[b])
    );

    barrel_shifter #(.N(Q), .DW(MSG_W + 1)) u_v2c_sh (
      .din(v2c_col[b]), .amt(amt_v2c[b]), .dout(v2c_row[b])
    );
  end

  // ---------------------------------------------------------------- VNUs
  for (genvar k = 0; k < Q; k++) begin : g_vnu
    msg_t [JB-1:0] c2v_in, u_out;
    for (genvar b = 0; b < JB; b++) begin : g_b
      assign c2v_in[b]        = c2v_col[b][k];
      assign v2c_col[b][k].m  = u_out[b];
      assign v2c_col[b][k].zp = zp_col[k];
    end
    vnu #(.JB(JB), .V_FLIP(V_PAT[k])) u_vnu (
      .gamma(gamma_cur[k]), .init(init_pass), .c2v(c2v_in), .u(u_out),
      .zp(zp_col[k]), .z(z_col[k])
    );
  end

  // ------------------------------------------------ syndrome and stop check
  logic [H-1:0] t;

  syndrome_unit #(.H(H)) u_synd (
    .clk, .rst_n, .col_valid, .first_col, .zp_rows, .t
  );

  if (SCHEME == 1) begin : g_f2
    stop_check_f2 #(.H(H), .HK(HK), .P(P)) u_stop (.t, .k(key), .stop);
  end else begin : g_f4
    stop_check_f4 #(.H(H), .G(G), .LR(LR), .P(P)) u_stop (
      .t, .kb(key[KEY_W-1 -: LR]), .ka(key[G*LR-1:0]), .stop
    );
  end

  // A frame column is only accepted when the decoder is ready.
  a_no_overrun: assert property (@(posedge clk) disable iff (!rst_n)
                                 in_valid && !in_ready |-> !col_valid);

endmodule
