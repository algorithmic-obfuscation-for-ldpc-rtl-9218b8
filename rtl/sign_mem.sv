// sign_mem: sign memory of the v2c messages, one word per block column.
//
// Word j holds, in check-node order, the signs of the JB*Q v2c messages that
// block column j sent in the current pass; in the next pass the CNUs read them
// back to form sign(v_mn) = p_m xor s_m xor sign(u_mn). Written on the rising
// edge when we is high, read asynchronously (old contents in a write cycle).
// Storage of the v2c signs is the usual arrangement of sliced message passing;
// its organisation here is this design's choice.
module sign_mem
  import ldpc_pkg::*;
#(
  parameter int WIDTH = JB_DEF * Q_DEF,
  parameter int KB    = KB_DEF
) (
  input  logic                 clk,
  input  logic                 we,
  input  logic [idx_w(KB)-1:0] addr,
  input  logic [WIDTH-1:0]     wdata,
  output logic [WIDTH-1:0]     rdata
);
  logic [WIDTH-1:0] mem [KB];

  always_ff @(posedge clk)
    if (we) mem[addr] <= wdata;

  assign rdata = mem[addr];

endmodule
