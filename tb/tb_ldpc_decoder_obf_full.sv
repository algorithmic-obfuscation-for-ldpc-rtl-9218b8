// tb_ldpc_decoder_obf_full: the decoder at its default size, (1270,635) code,
// 5 x 10 circulants of 127, scheme 2 (g = 15, l_r = 10, 160-bit key), I_max = 15.
//
// Frames of the all-zero codeword through a binary symmetric channel are
// decoded with the right key, a low-corruptibility wrong key (ka wrong, kb equal
// to the group parities of ka) and a high-corruptibility wrong key. The decoded
// word, success flag and iteration count are compared with the bit-exact
// reference min-sum decoder, and the latency with KB*(iterations+1) cycles.
// The right key must decode and stop early where the reference does, and a
// wrong key must cost iterations on at least one frame.
module tb_ldpc_decoder_obf_full;
  import ldpc_pkg::*;
  import ldpc_ref_pkg::*;

  localparam int Q = Q_DEF, JB = JB_DEF, KB = KB_DEF, IMAX = IMAX_DEF, HK = 127, G = 15, LR = 10;
  localparam int N = KB * Q, H = JB * Q;
  localparam int KW2 = LR + G * LR;
  localparam logic [Q-1:0] VP = V_PAT_DEF;
  localparam int NFRAMES = 9;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [KW2-1:0] key2;
  logic in_valid = 1'b0;
  logic rdy2, done2, succ2;
  logic [idx_w(IMAX+1)-1:0] it2;
  msg_t [Q-1:0] gcol;
  logic [N-1:0] z2;

  ldpc_decoder_obf dut2 (
    .clk, .rst_n, .key(key2), .in_valid, .in_ready(rdy2), .gamma_col(gcol),
    .done(done2), .success(succ2), .iters(it2), .z(z2));

  int checks = 0, failures = 0;
  int n_init_stop = 0, n_conv = 0, n_slow = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // watchdog
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  cfg_t c1, c2;
  bit   w[], p[], gs[], kr2[], kw2[];
  int   gm[];

  task automatic wait_done(output int cyc);
    cyc = 0;
    forever begin
      @(negedge clk);
      cyc++;
      if (done2) break;
    end
  endtask

  task automatic drive_frame();
    for (int j = 0; j < KB; j++) begin
      in_valid = 1'b1;
      for (int k = 0; k < Q; k++) gcol[k] = '{sgn: gs[j*Q + k], mag: MAG_W'(gm[j*Q + k])};
      @(negedge clk);
    end
    in_valid = 1'b0;
  endtask

  function automatic bit vec_eq(logic [N-1:0] a, bit b[]);
    for (int i = 0; i < N; i++) if (a[i] != b[i]) return 1'b0;
    return 1'b1;
  endfunction

  initial begin
    c1 = '{q: Q, jb: JB, kb: KB, imax: IMAX, scheme: 1, hk: HK, g: G, lr: LR};
    c2 = c1; c2.scheme = 2;
    w = new[Q];
    for (int i = 0; i < Q; i++) w[i] = VP[i];
    calc_p(c1, w, p);
    right_key(c2, p, kr2);
    gs = new[N]; gm = new[N];
    key2 = '0; gcol = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);

    for (int f = 0; f < NFRAMES; f++) begin
      int   kind;                      // 0 right keys, 1 low-corr wrong, 2 high-corr wrong
      int   perr_pm;                   // error probability in 1/1000
      bit   zr[], zw2[];
      int   ir, iw2, cyc2;
      bit   sr, sw2;
      kind = f % 3;
      perr_pm = (f < 3) ? 0 : 20;
      for (int i = 0; i < N; i++) begin
        gs[i] = ($urandom_range(999) < perr_pm);
        gm[i] = 6;
      end
      // keys
      kw2 = new[KW2];
      foreach (kw2[i]) kw2[i] = kr2[i];
      if (kind != 0) begin
        for (int i = 0; i < G*LR; i++) kw2[i] = $urandom_range(1);
        for (int i = 0; i < LR; i++) begin       // parity of each ka group
          automatic bit pa = 1'b0;
          for (int x = 0; x < G; x++) pa ^= kw2[i*G + x];
          kw2[G*LR + i] = pa;
        end
        if (kind == 1) begin
          // low corruptibility: ka != right ka, kb = parities of ka
          automatic bit same = 1'b1;
          for (int i = 0; i < G*LR; i++) if (kw2[i] != kr2[i]) same = 1'b0;
          if (same) begin kw2[0] ^= 1'b1; kw2[G*LR] ^= 1'b1; end
        end else begin
          // high corruptibility: kb differs from the parities of ka in one group
          kw2[G*LR + $urandom_range(LR-1)] ^= 1'b1;
        end
      end
      foreach (kw2[i]) key2[i] = kw2[i];

      decode(c2, gs, gm, kr2, p, zr, ir, sr);       // right-key behaviour
      decode(c2, gs, gm, kw2, p, zw2, iw2, sw2);

      fork
        drive_frame();
        wait_done(cyc2);
      join

      check(vec_eq(z2, zw2), $sformatf("frame %0d scheme 2 z", f));
      check(succ2 == sw2,    $sformatf("frame %0d scheme 2 success %0d exp %0d", f, succ2, sw2));
      check(int'(it2) == iw2, $sformatf("frame %0d scheme 2 iters %0d exp %0d", f, it2, iw2));
      check(cyc2 == KB * (iw2 + 1), $sformatf("frame %0d scheme 2 latency %0d", f, cyc2));

      if (kind == 0 && sr && ir == 0) n_init_stop++;
      if (kind == 0 && sr && ir > 0)  n_conv++;
      if (kind != 0 && sr && int'(it2) > ir) n_slow++;
      $display("frame %0d kind %0d perr %0d/1000: ref(right) iters %0d ok %0d | dut iters %0d ok %0d",
               f, kind, perr_pm, ir, sr, it2, succ2);
      @(negedge clk);
    end

    $display("mechanisms: init_stop=%0d converge=%0d wrong_key_slow=%0d", n_init_stop, n_conv, n_slow);
    check(n_init_stop > 0, "no stop at the initial check");
    check(n_conv > 0,      "no convergence after iterations");
    check(n_slow > 0,      "no wrong-key throughput loss");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
