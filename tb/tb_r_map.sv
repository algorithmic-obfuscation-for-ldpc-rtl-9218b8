// tb_r_map: r_i must be the parity of t[i*G .. i*G+G-1] (G = 15, l_r = 10).
module tb_r_map;
  localparam int G = 15, LR = 10;
  logic [G*LR-1:0] t;
  logic [LR-1:0] r;

  r_map #(.G(G), .LR(LR)) dut (.t, .r);

  int checks = 0, failures = 0;
  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int it = 0; it < 2000; it++) begin
      for (int i = 0; i < G*LR; i++) t[i] = ($urandom_range(9) < 2);
      #1;
      for (int i = 0; i < LR; i++) begin
        automatic bit e = 1'b0;
        for (int x = 0; x < G; x++) e ^= t[i*G + x];
        checks++;
        if (r[i] != e) begin failures++; $display("FAIL it %0d r[%0d]", it, i); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
