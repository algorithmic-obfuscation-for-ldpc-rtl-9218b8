// tb_hd_mem: reset clears the frame; column writes land at bits j*Q .. j*Q+Q-1
// of z; writes without we are ignored.
module tb_hd_mem;
  localparam int Q = 127, KB = 10;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic we = 1'b0;
  logic [3:0] waddr = '0;
  logic [Q-1:0] wdata = '0;
  logic [KB*Q-1:0] z, model;

  hd_mem #(.Q(Q), .KB(KB)) dut (.clk, .rst_n, .we, .waddr, .wdata, .z);

  int checks = 0, failures = 0;
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    checks++; if (z != '0) begin failures++; $display("FAIL reset"); end
    rst_n = 1'b1;
    model = '0;
    for (int i = 0; i < 60; i++) begin
      we = ($urandom_range(3) != 0);
      waddr = 4'($urandom_range(KB-1));
      for (int k = 0; k < Q; k++) wdata[k] = 1'($urandom);
      if (we) model[waddr*Q +: Q] = wdata;
      @(negedge clk);
      checks++;
      if (z != model) begin failures++; $display("FAIL step %0d", i); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
