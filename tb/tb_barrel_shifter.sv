// tb_barrel_shifter: every rotation amount 0..126 of random 127-element vectors,
// checked against dout[i] = din[(i + amt) mod 127].
module tb_barrel_shifter;
  localparam int N = 127, DW = 6;
  logic [N-1:0][DW-1:0] din, dout;
  logic [6:0] amt;

  barrel_shifter #(.N(N), .DW(DW)) dut (.din, .amt, .dout);

  int checks = 0, failures = 0;
  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int rep = 0; rep < 4; rep++)
      for (int a = 0; a < N; a++) begin
        for (int i = 0; i < N; i++) din[i] = DW'($urandom);
        amt = 7'(a);
        #1;
        for (int i = 0; i < N; i++) begin
          checks++;
          if (dout[i] != din[(i + a) % N]) begin
            failures++;
            if (failures < 10) $display("FAIL amt %0d i %0d", a, i);
          end
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
