// tb_decoder_ctrl: frames with a gap in the input, stop asserted at a chosen
// pass (0 = initial check, 1..15) or never. Checks the column sequence, the
// init_pass flag, done one cycle after the last column of the final pass
// (KB*(I+1) cycles for back-to-back input), success and iters.
module tb_decoder_ctrl;
  localparam int KB = 10, IMAX = 15;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic in_valid = 1'b0, in_ready, stop = 1'b0;
  logic col_valid, init_pass, first_col, last_col, done, success;
  logic [3:0] col;
  logic [3:0] iters;

  decoder_ctrl #(.KB(KB), .IMAX(IMAX)) dut (.clk, .rst_n, .in_valid, .in_ready, .stop,
    .col_valid, .col, .init_pass, .first_col, .last_col, .done, .success, .iters);

  int checks = 0, failures = 0;
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  int stop_pass;   // -1: never
  int pass_no, col_no, cyc;

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int f = 0; f < 20; f++) begin
      stop_pass = (f % 17 > IMAX) ? -1 : (f % 17);
      // load: 10 columns, with one idle cycle after column 4 on odd frames
      pass_no = 0; col_no = 0; cyc = 0;
      @(negedge clk);
      chk(in_ready && !done, "ready in initial state");
      while (1) begin
        if (pass_no == 0) begin
          in_valid = !((f % 2 == 1) && col_no == 5 && cyc == 5);
        end else in_valid = 1'b0;
        stop = (pass_no == stop_pass) && (col_no == KB-1);
        #1;
        if (col_valid) begin
          chk(col == 4'(col_no) && init_pass == (pass_no == 0) && first_col == (col_no == 0) &&
              last_col == (col_no == KB-1), $sformatf("frame %0d pass %0d col %0d", f, pass_no, col_no));
          if (col_no == KB-1) begin
            col_no = 0;
            if (stop || pass_no == IMAX) begin
              @(negedge clk); in_valid = 1'b0; stop = 1'b0; #1;
              chk(done && !in_ready, "done pulse");
              chk(success == (stop_pass >= 0), $sformatf("frame %0d success", f));
              chk(iters == 4'((stop_pass >= 0) ? stop_pass : IMAX), $sformatf("frame %0d iters %0d", f, iters));
              break;
            end
            pass_no++;
          end else col_no++;
        end else begin
          chk(pass_no == 0 && !in_valid, "idle only when input idles");
        end
        chk(!done, "no early done");
        @(negedge clk);
        cyc++;
      end
      @(negedge clk);
      #1 chk(!done && in_ready, "back to initial state");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
