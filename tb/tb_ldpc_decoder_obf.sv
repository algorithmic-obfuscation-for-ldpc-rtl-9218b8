// tb_ldpc_decoder_obf: end-to-end test of the obfuscated decoder at a reduced
// code size (5 x 10 circulants of 31, 310-bit frames), both locking schemes.
//
// Two decoders, one per scheme, receive the same frames: the all-zero codeword
// sent over a binary symmetric channel with a per-frame error rate. Each frame
// is decoded with one of three key kinds: the right key; a low-corruptibility
// wrong key (scheme 1: any other key; scheme 2: ka wrong but group parities of
// ka equal to kb); a high-corruptibility wrong key (scheme 2 only: parities of
// ka differ from kb). Every result (decoded word, success flag, iteration count)
// is compared with a bit-exact reference min-sum decoder that knows neither v
// nor the RTL, and the latency is checked against KB*(iterations+1) cycles.
// The test also requires each mechanism to occur at least once: stop at the
// initial check, stop after some iterations, decoding failure at IMAX, a wrong
// key forcing IMAX iterations where the right key stops early, and a
// high-corruptibility key stopping prematurely on a wrong word.
module tb_ldpc_decoder_obf;
  import ldpc_pkg::*;
  import ldpc_ref_pkg::*;

  localparam int Q = 31, JB = 5, KB = 10, IMAX = 15, HK = 31, G = 3, LR = 4;
  localparam int N = KB * Q, H = JB * Q;
  localparam int KW1 = HK, KW2 = LR + G * LR;
  localparam logic [Q-1:0] VP = 31'h5B3A_6C1D;
  localparam int NFRAMES = 36;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [KW1-1:0] key1;
  logic [KW2-1:0] key2;
  logic in_valid = 1'b0;
  logic rdy1, rdy2, done1, done2, succ1, succ2;
  logic [idx_w(IMAX+1)-1:0] it1, it2;
  msg_t [Q-1:0] gcol;
  logic [N-1:0] z1, z2;

  ldpc_decoder_obf #(.Q(Q), .JB(JB), .KB(KB), .IMAX(IMAX), .SCHEME(1), .HK(HK),
                     .V_PAT(VP)) dut1 (
    .clk, .rst_n, .key(key1), .in_valid, .in_ready(rdy1), .gamma_col(gcol),
    .done(done1), .success(succ1), .iters(it1), .z(z1));

  ldpc_decoder_obf #(.Q(Q), .JB(JB), .KB(KB), .IMAX(IMAX), .SCHEME(2), .G(G), .LR(LR),
                     .V_PAT(VP)) dut2 (
    .clk, .rst_n, .key(key2), .in_valid, .in_ready(rdy2), .gamma_col(gcol),
    .done(done2), .success(succ2), .iters(it2), .z(z2));

  int checks = 0, failures = 0;
  int n_init_stop = 0, n_conv = 0, n_fail = 0, n_slow = 0, n_premature = 0, n_low2 = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // watchdog
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  cfg_t c1, c2;
  bit   w[], p[], gs[], kr1[], kr2[], kw1[], kw2[];
  int   gm[];

  task automatic wait_done(input bit which, output int cyc);
    cyc = 0;
    forever begin
      @(negedge clk);
      cyc++;
      if ((which == 0) ? done1 : done2) break;
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
    right_key(c1, p, kr1);
    right_key(c2, p, kr2);
    gs = new[N]; gm = new[N];
    key1 = '0; key2 = '0; gcol = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);

    for (int f = 0; f < NFRAMES; f++) begin
      int   kind;                      // 0 right keys, 1 low-corr wrong, 2 high-corr wrong
      int   perr_pm;                   // error probability in 1/1000
      bit   zr[], zw1[], zw2[];
      int   ir, iw1, iw2, cyc1, cyc2;
      bit   sr, sw1, sw2;
      kind = f % 3;
      perr_pm = (f < 3) ? 0 : ((f % 4 == 0) ? 120 : 15 + 10 * (f % 4));
      for (int i = 0; i < N; i++) begin
        gs[i] = ($urandom_range(999) < perr_pm);
        gm[i] = 6;
      end
      // keys
      kw1 = new[KW1]; kw2 = new[KW2];
      foreach (kw1[i]) kw1[i] = kr1[i];
      foreach (kw2[i]) kw2[i] = kr2[i];
      if (kind != 0) begin
        kw1[$urandom_range(HK-1)] ^= 1'b1;
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
      foreach (kw1[i]) key1[i] = kw1[i];
      foreach (kw2[i]) key2[i] = kw2[i];

      decode(c1, gs, gm, kr1, p, zr, ir, sr);       // right-key behaviour
      decode(c1, gs, gm, kw1, p, zw1, iw1, sw1);
      decode(c2, gs, gm, kw2, p, zw2, iw2, sw2);

      fork
        drive_frame();
        wait_done(0, cyc1);
        wait_done(1, cyc2);
      join

      check(vec_eq(z1, zw1), $sformatf("frame %0d scheme 1 z", f));
      check(succ1 == sw1,    $sformatf("frame %0d scheme 1 success %0d exp %0d", f, succ1, sw1));
      check(int'(it1) == iw1, $sformatf("frame %0d scheme 1 iters %0d exp %0d", f, it1, iw1));
      check(cyc1 == KB * (iw1 + 1), $sformatf("frame %0d scheme 1 latency %0d", f, cyc1));
      check(vec_eq(z2, zw2), $sformatf("frame %0d scheme 2 z", f));
      check(succ2 == sw2,    $sformatf("frame %0d scheme 2 success %0d exp %0d", f, succ2, sw2));
      check(int'(it2) == iw2, $sformatf("frame %0d scheme 2 iters %0d exp %0d", f, it2, iw2));
      check(cyc2 == KB * (iw2 + 1), $sformatf("frame %0d scheme 2 latency %0d", f, cyc2));

      if (kind == 0) begin
        if (sr && ir == 0) n_init_stop++;
        if (sr && ir > 0)  n_conv++;
        if (!sr)           n_fail++;
      end else begin
        if (sr && ir < IMAX && !succ1 && int'(it1) == IMAX) n_slow++;
        if (kind == 1) n_low2++;
        if (kind == 2 && succ2 && (!sr || int'(it2) < ir)) n_premature++;
      end
      $display("frame %0d kind %0d perr %0d/1000: ref(right) iters %0d ok %0d | s1 iters %0d ok %0d | s2 iters %0d ok %0d",
               f, kind, perr_pm, ir, sr, it1, succ1, it2, succ2);
      @(negedge clk);
    end

    $display("mechanisms: init_stop=%0d converge=%0d fail=%0d wrong_key_slow=%0d low_corr_s2=%0d premature_stop=%0d",
             n_init_stop, n_conv, n_fail, n_slow, n_low2, n_premature);
    check(n_init_stop > 0, "no stop at the initial check");
    check(n_conv > 0,      "no convergence after iterations");
    check(n_fail > 0,      "no decoding failure");
    check(n_slow > 0,      "no wrong-key throughput loss");
    check(n_low2 > 0,      "no low-corruptibility key in scheme 2");
    check(n_premature > 0, "no premature stop with a high-corruptibility key");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
