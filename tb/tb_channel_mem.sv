// tb_channel_mem: write all columns, read them back in random order; a read of
// the column being written returns the old word until the clock edge.
module tb_channel_mem;
  import ldpc_pkg::*;
  localparam int Q = 127, KB = 10;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic we = 1'b0;
  logic [3:0] waddr = '0, raddr = '0;
  msg_t [Q-1:0] wdata, rdata;
  msg_t [Q-1:0] model [KB];

  channel_mem #(.Q(Q), .KB(KB)) dut (.clk, .we, .waddr, .wdata, .raddr, .rdata);

  int checks = 0, failures = 0;
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic randomize_word(output msg_t [Q-1:0] w);
    for (int k = 0; k < Q; k++) w[k] = msg_t'($urandom);
  endtask

  initial begin
    @(negedge clk);
    for (int rep = 0; rep < 5; rep++) begin
      for (int j = 0; j < KB; j++) begin
        we = 1'b1; waddr = 4'(j); randomize_word(wdata); raddr = 4'(j);
        if (rep > 0) begin
          #1; checks++;
          if (rdata != model[j]) begin failures++; $display("FAIL old word %0d", j); end
        end
        model[j] = wdata;
        @(negedge clk);
      end
      we = 1'b0;
      for (int i = 0; i < 20; i++) begin
        raddr = 4'($urandom_range(KB-1));
        #1; checks++;
        if (rdata != model[raddr]) begin failures++; $display("FAIL read %0d", raddr); end
        @(negedge clk);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
