// tb_cnu: check node unit against a software min-sum check node.
// Random v2c messages are fed one block column per cycle for several passes;
// during each pass the c2v output for every column is compared with
// floor(3/4 * (idx==j ? min2 : min1)) and p_m xor s xor (previous v2c sign),
// computed here from the previous pass's messages. Two instances cover
// P_FLIP = 0 and 1. Magnitudes are drawn from a small range to force ties.
module tb_cnu;
  import ldpc_pkg::*;
  localparam int KB = 10;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic col_valid = 1'b0, first_col, last_col, usp;
  logic [3:0] col;
  msg_t u_in, c2v0, c2v1;

  cnu #(.KB(KB), .P_FLIP(1'b0)) dut0 (.clk, .rst_n, .col_valid, .col, .first_col, .last_col,
                                      .u_in, .u_sign_prev(usp), .c2v(c2v0));
  cnu #(.KB(KB), .P_FLIP(1'b1)) dut1 (.clk, .rst_n, .col_valid, .col, .first_col, .last_col,
                                      .u_in, .u_sign_prev(usp), .c2v(c2v1));

  int checks = 0, failures = 0;
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int pm [KB]; bit ps [KB];     // previous pass messages
  int cm [KB]; bit cs [KB];     // current pass messages

  initial begin
    u_in = '0; usp = 1'b0; col = '0; first_col = 1'b0; last_col = 1'b0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int pass = 0; pass < 40; pass++) begin
      int mn1, mn2, idx; bit s;
      mn1 = 99; mn2 = 99; idx = 0; s = 1'b0;
      for (int j = 0; j < KB; j++) begin
        a_min: begin
          automatic int a = pm[j];
          if (a < mn1) begin mn2 = mn1; mn1 = a; idx = j; end
          else if (a < mn2) mn2 = a;
          s ^= ps[j];
        end
      end
      for (int j = 0; j < KB; j++) begin
        cm[j] = (pass % 3 == 0) ? $urandom_range(15) : $urandom_range(4);
        cs[j] = $urandom_range(1);
        col_valid = 1'b1; col = 4'(j); first_col = (j == 0); last_col = (j == KB-1);
        u_in = '{sgn: cs[j], mag: MAG_W'(cm[j])};
        usp = ps[j];
        #1;
        if (pass > 0) begin
          int em; bit es;
          em = ((j == idx ? mn2 : mn1) * 3) / 4;
          es = s ^ ps[j];
          checks++;
          if (c2v0.mag != MAG_W'(em) || c2v0.sgn != es || c2v1.mag != MAG_W'(em) || c2v1.sgn != !es) begin
            failures++;
            $display("FAIL pass %0d col %0d: got %0d/%0d %0d/%0d exp %0d/%0d", pass, j,
                     c2v0.sgn, c2v0.mag, c2v1.sgn, c2v1.mag, es, em);
          end
        end
        @(negedge clk);
        // an idle cycle must not disturb the state
        if (j == 4) begin col_valid = 1'b0; u_in = '{sgn: 1'b1, mag: '0}; @(negedge clk); end
      end
      col_valid = 1'b0;
      for (int j = 0; j < KB; j++) begin pm[j] = cm[j]; ps[j] = cs[j]; end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
