// tb_stop_check_f4: f4 at its paper size (h = 635, g = 15, l_r = 10) with a
// fixed p. Checks: the right key stops at t = p and not at one-bit neighbours;
// a low-corruptibility wrong key (ka parities = kb) stops only at its own single
// syndrome; a high-corruptibility wrong key stops at every syndrome with r = kb,
// whatever the remaining bits; random cases against the equation.
module tb_stop_check_f4;
  localparam int H = 635, G = 15, LR = 10, GL = G * LR;
  localparam logic [H-1:0] PV = {5{127'h6D2B_F019_8CE4_3A75_01B9_E6D3_5F82_C47A}};
  logic [H-1:0] t;
  logic [LR-1:0] kb;
  logic [GL-1:0] ka;
  logic stop;

  stop_check_f4 #(.H(H), .G(G), .LR(LR), .P(PV)) dut (.t, .kb, .ka, .stop);

  int checks = 0, failures = 0;
  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [LR-1:0] par(logic [GL-1:0] v);
    logic [LR-1:0] r;
    for (int i = 0; i < LR; i++) r[i] = ^v[i*G +: G];
    return r;
  endfunction

  function automatic bit f4_ref(logic [H-1:0] tt, logic [LR-1:0] b, logic [GL-1:0] a);
    bit f3 = (par(tt[GL-1:0]) == b);
    bit f2 = (tt[GL-1:0] == a) && (tt[H-1:GL] == PV[H-1:GL]);
    bit fh = (par(tt[GL-1:0]) != par(a));
    return f3 && (f2 || fh);
  endfunction

  task automatic expect_stop(bit e, string what);
    #1; checks++;
    if (stop != e) begin failures++; $display("FAIL %s: stop %0d exp %0d", what, stop, e); end
  endtask

  initial begin
    ka = PV[GL-1:0]; kb = par(PV[GL-1:0]);
    t = PV;
    expect_stop(1'b1, "right key, t = p");
    for (int i = 0; i < 100; i++) begin
      automatic int b = $urandom_range(H-1);
      t = PV; t[b] = ~t[b];
      expect_stop(1'b0, "right key, one bit off");
    end
    // low-corruptibility wrong keys
    for (int i = 0; i < 50; i++) begin
      for (int x = 0; x < GL; x++) ka[x] = 1'($urandom);
      kb = par(ka);
      t = PV; t[GL-1:0] = ka;
      expect_stop(1'b1, "low-corr key at its syndrome");
      t[GL + $urandom_range(H-GL-1)] ^= 1'b1;
      expect_stop(1'b0, "low-corr key, tail differs");
    end
    // high-corruptibility wrong keys
    for (int i = 0; i < 50; i++) begin
      for (int x = 0; x < GL; x++) ka[x] = 1'($urandom);
      kb = par(ka); kb[$urandom_range(LR-1)] ^= 1'b1;
      for (int x = 0; x < H; x++) t[x] = 1'($urandom);
      // force r(t) = kb by fixing one bit per group
      for (int g = 0; g < LR; g++) if (^t[g*G +: G] != kb[g]) t[g*G] ^= 1'b1;
      expect_stop(1'b1, "high-corr key, r = kb, random tail");
      t[$urandom_range(GL-1)] ^= 1'b1;
      expect_stop(1'b0, "high-corr key, r != kb");
    end
    // random
    for (int i = 0; i < 300; i++) begin
      for (int x = 0; x < H; x++) t[x] = 1'($urandom);
      for (int x = 0; x < GL; x++) ka[x] = 1'($urandom);
      kb = (i % 2) ? par(t[GL-1:0]) : LR'($urandom);
      expect_stop(f4_ref(t, kb, ka), "random");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
