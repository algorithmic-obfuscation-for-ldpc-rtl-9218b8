// tb_stop_check_f2: f2 at its paper size (h = 635, h_k = 127) with a fixed p.
// Directed cases: t = p with the right key stops; one flipped syndrome bit, in
// the keyed or in the fixed part, does not; a wrong key stops only at the
// syndrome equal to that key on the keyed bits and p elsewhere. Plus random
// t/k pairs against the equation.
module tb_stop_check_f2;
  localparam int H = 635, HK = 127;
  localparam logic [H-1:0] PV = {5{127'h3F05_A9C2_7714_D0EE_8B61_2C39_F4A7_1D5B}};
  logic [H-1:0] t;
  logic [HK-1:0] k;
  logic stop;

  stop_check_f2 #(.H(H), .HK(HK), .P(PV)) dut (.t, .k, .stop);

  int checks = 0, failures = 0;
  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_stop(bit e, string what);
    #1; checks++;
    if (stop != e) begin failures++; $display("FAIL %s: stop %0d exp %0d", what, stop, e); end
  endtask

  initial begin
    t = PV; k = PV[HK-1:0];
    expect_stop(1'b1, "right key, t = p");
    for (int i = 0; i < 200; i++) begin
      automatic int b = $urandom_range(H-1);
      t = PV; t[b] = ~t[b];
      expect_stop(1'b0, $sformatf("bit %0d flipped", b));
    end
    for (int i = 0; i < 100; i++) begin
      for (int x = 0; x < HK; x++) k[x] = 1'($urandom);
      t = PV;
      expect_stop(k == PV[HK-1:0], "wrong key, t = p");
      t[HK-1:0] = k;
      expect_stop(1'b1, "wrong key, t = [p-tail || k]");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
