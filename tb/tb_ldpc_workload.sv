// tb_ldpc_workload: throughput and error-rate experiment on the full-size
// (1270,635) decoder, both locking schemes, in the setting of the published
// evaluation: binary symmetric channel, I_max = 15, scheme 1 with a 127-bit key,
// scheme 2 with g = 15, l_r = 10.
//
// Random frames (all-zero codeword, input BER 2%) are decoded by a scheme-1 and
// a scheme-2 decoder with the right key, with a low-corruptibility wrong key and
// (scheme 2) with high-corruptibility wrong keys whose kb part is at Hamming
// distance 3 or 9 from the right one and whose ka part is random. Every result is checked
// against the bit-exact reference. The average number of iterations per key
// class is reported, and the test requires the right key to need on average
// less than a third of what a wrong key costs in clock cycles, i.e. at least a
// 3x throughput loss for wrong keys. Frame errors per class are reported.
module tb_ldpc_workload;
  import ldpc_pkg::*;
  import ldpc_ref_pkg::*;

  localparam int Q = Q_DEF, JB = JB_DEF, KB = KB_DEF, IMAX = IMAX_DEF, HK = 127, G = 15, LR = 10;
  localparam int N = KB * Q;
  localparam int KW1 = HK, KW2 = LR + G * LR;
  localparam logic [Q-1:0] VP = V_PAT_DEF;
  localparam int NFRAMES = 30;        // frames per key class
  localparam int BER_PM  = 20;        // input bit error rate in 1/1000

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [KW1-1:0] key1;
  logic [KW2-1:0] key2;
  logic in_valid = 1'b0;
  logic rdy1, rdy2, done1, done2, succ1, succ2;
  logic [idx_w(IMAX+1)-1:0] it1, it2;
  msg_t [Q-1:0] gcol;
  logic [N-1:0] z1, z2;

  ldpc_decoder_obf #(.SCHEME(1)) dut1 (
    .clk, .rst_n, .key(key1), .in_valid, .in_ready(rdy1), .gamma_col(gcol),
    .done(done1), .success(succ1), .iters(it1), .z(z1));

  ldpc_decoder_obf #(.SCHEME(2)) dut2 (
    .clk, .rst_n, .key(key2), .in_valid, .in_ready(rdy2), .gamma_col(gcol),
    .done(done2), .success(succ2), .iters(it2), .z(z2));

  int checks = 0, failures = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  cfg_t c1, c2;
  bit   w[], p[], gs[], kr1[], kr2[], kw1[], kw2[];
  int   gm[];
  // statistics [s1 right, s1 wrong, s2 right, s2 low, s2 high HD 3, s2 high HD 9]
  int   cyc_sum [6], it_sum [6], ferr [6], nfr [6];

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

    for (int f = 0; f < 4 * NFRAMES; f++) begin
      int kind, cyc1, cyc2, iw1, iw2, s1c, s2c;
      bit zw1[], zw2[], sw1, sw2;
      kind = f % 4;                  // 0 right, 1 low-corruptibility wrong, 2/3 high HD 3/9 (scheme 2)
      for (int i = 0; i < N; i++) begin
        gs[i] = ($urandom_range(999) < BER_PM);
        gm[i] = 6;
      end
      kw1 = new[KW1]; kw2 = new[KW2];
      foreach (kw1[i]) kw1[i] = kr1[i];
      foreach (kw2[i]) kw2[i] = kr2[i];
      if (kind != 0) begin
        for (int i = 0; i < HK; i++) kw1[i] = 1'($urandom_range(1));
        kw1[0] = ~kr1[0];            // never the right key
        for (int i = 0; i < G*LR; i++) kw2[i] = 1'($urandom_range(1));
        kw2[0] = ~kr2[0];
        // kb: parities of ka (low corruptibility), or r* with 3 or 9 bits
        // flipped (high corruptibility, as in the published experiment)
        for (int i = 0; i < LR; i++) begin
          automatic bit pa = 1'b0;
          for (int x = 0; x < G; x++) pa ^= kw2[i*G + x];
          kw2[G*LR + i] = pa;
        end
        if (kind >= 2) begin
          automatic int hd = (kind == 2) ? 3 : 9, nflip = 0;
          automatic bit same = 1'b1;
          automatic bit flip [LR] = '{default: 1'b0};
          while (nflip < hd) begin
            automatic int pos = $urandom_range(LR-1);
            if (!flip[pos]) begin flip[pos] = 1'b1; nflip++; end
          end
          for (int i = 0; i < LR; i++) kw2[G*LR + i] = kr2[G*LR + i] ^ flip[i];
          // keep it high-corruptibility: the parities of ka must differ from kb
          for (int i = 0; i < LR; i++) begin
            automatic bit pa = 1'b0;
            for (int x = 0; x < G; x++) pa ^= kw2[i*G + x];
            if (pa != kw2[G*LR + i]) same = 1'b0;
          end
          if (same) kw2[1] = ~kw2[1];
                  end
      end
      foreach (kw1[i]) key1[i] = kw1[i];
      foreach (kw2[i]) key2[i] = kw2[i];

      decode(c1, gs, gm, kw1, p, zw1, iw1, sw1);
      decode(c2, gs, gm, kw2, p, zw2, iw2, sw2);

      fork
        drive_frame();
        wait_done(0, cyc1);
        wait_done(1, cyc2);
      join

      check(vec_eq(z1, zw1) && succ1 == sw1 && int'(it1) == iw1 && cyc1 == KB * (iw1 + 1),
            $sformatf("frame %0d scheme 1", f));
      check(vec_eq(z2, zw2) && succ2 == sw2 && int'(it2) == iw2 && cyc2 == KB * (iw2 + 1),
            $sformatf("frame %0d scheme 2", f));

      s1c = (kind == 0) ? 0 : 1;
      s2c = 2 + kind;
      cyc_sum[s1c] += cyc1; it_sum[s1c] += int'(it1); nfr[s1c]++;
      cyc_sum[s2c] += cyc2; it_sum[s2c] += int'(it2); nfr[s2c]++;
      if (z1 != '0) ferr[s1c]++;     // the codeword sent is all-zero
      if (z2 != '0) ferr[s2c]++;
      @(negedge clk);
    end

    begin
      automatic string nm [6] = '{"scheme 1, right key", "scheme 1, wrong key",
                        "scheme 2, right key", "scheme 2, low-corr wrong key",
                        "scheme 2, high-corr key, HD 3", "scheme 2, high-corr key, HD 9"};
      for (int c = 0; c < 6; c++)
        $display("%-32s frames %0d  avg iterations %0.2f  avg cycles/frame %0.1f  frame errors %0d",
                 nm[c], nfr[c], real'(it_sum[c]) / nfr[c], real'(cyc_sum[c]) / nfr[c], ferr[c]);
    end
    // throughput: cycles per frame with a wrong key at least 3x the right key's
    check(3 * cyc_sum[0] * nfr[1] < cyc_sum[1] * nfr[0], "scheme 1 wrong key costs < 3x cycles");
    check(3 * cyc_sum[2] * nfr[3] < cyc_sum[3] * nfr[2], "scheme 2 low-corr key costs < 3x cycles");
    check(3 * cyc_sum[2] * nfr[4] < cyc_sum[4] * nfr[2], "scheme 2 HD-3 key costs < 3x cycles");
    check(3 * cyc_sum[2] * nfr[5] < cyc_sum[5] * nfr[2], "scheme 2 HD-9 key costs < 3x cycles");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
