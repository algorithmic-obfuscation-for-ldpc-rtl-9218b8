// hd_mem: hard-decision memory holding the decoded frame z.
//
// KB words of Q bits, written one block column per cycle (rising edge, we high)
// with the VNU outputs z = z' xor v. The whole frame is presented in parallel on
// z, bit j*Q + k being bit k of block column j, i.e. codeword bit n = j*Q + k.
// Reset clears the frame. Organisation is this design's choice.
module hd_mem
  import ldpc_pkg::*;
#(
  parameter int Q  = Q_DEF,
  parameter int KB = KB_DEF
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 we,
  input  logic [idx_w(KB)-1:0] waddr,
  input  logic [Q-1:0]         wdata,
  output logic [KB*Q-1:0]      z
);
  logic [Q-1:0] mem [KB];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int j = 0; j < KB; j++) mem[j] <= '0;
    end else if (we) begin
      mem[waddr] <= wdata;
    end
  end

  always_comb
    for (int j = 0; j < KB; j++) z[j*Q +: Q] = mem[j];

endmodule
