// channel_mem: channel LLR memory, one word per block column.
//
// KB words of Q sign-magnitude messages. A word is written on the rising edge
// when we is high; the read port is asynchronous, so a column read in the same
// cycle it is written returns the old contents. Filled while a frame is loaded
// and read one block column per cycle in every decoding iteration.
// The organisation is this design's choice; the need for the memory is the
// paper's.
module channel_mem
  import ldpc_pkg::*;
#(
  parameter int Q  = Q_DEF,
  parameter int KB = KB_DEF
) (
  input  logic                 clk,
  input  logic                 we,
  input  logic [idx_w(KB)-1:0] waddr,
  input  msg_t [Q-1:0]         wdata,
  input  logic [idx_w(KB)-1:0] raddr,
  output msg_t [Q-1:0]         rdata
);
  msg_t [Q-1:0] mem [KB];

  always_ff @(posedge clk)
    if (we) mem[waddr] <= wdata;

  assign rdata = mem[raddr];

endmodule
