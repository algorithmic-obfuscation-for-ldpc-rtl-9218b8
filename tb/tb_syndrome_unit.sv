// tb_syndrome_unit: random passes of 10 columns, with idle cycles in between;
// t must equal the XOR of the column inputs since first_col, this cycle's
// included.
module tb_syndrome_unit;
  localparam int H = 635, KB = 10;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic col_valid = 1'b0, first_col = 1'b0;
  logic [H-1:0] zp_rows = '0, t, acc;

  syndrome_unit #(.H(H)) dut (.clk, .rst_n, .col_valid, .first_col, .zp_rows, .t);

  int checks = 0, failures = 0;
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int pass = 0; pass < 20; pass++) begin
      acc = '0;
      for (int j = 0; j < KB; j++) begin
        col_valid = 1'b1; first_col = (j == 0);
        for (int i = 0; i < H; i++) zp_rows[i] = 1'($urandom);
        acc ^= zp_rows;
        #1; checks++;
        if (t != acc) begin failures++; $display("FAIL pass %0d col %0d", pass, j); end
        @(negedge clk);
        if (j == 3) begin col_valid = 1'b0; first_col = 1'b0; @(negedge clk); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
