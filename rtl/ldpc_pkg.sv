// ldpc_pkg: types and constants shared by the obfuscated QC-LDPC min-sum decoder.
//
// The code is a quasi-cyclic LDPC code whose parity check matrix H is a JB x KB
// array of q x q cyclically shifted identity matrices (5 x 10 circulants of size
// 127 for the (1270,635) code this design is dimensioned for). The circulant in
// block row b, block column j is the identity shifted by shift_of(b,j,q): row r of
// that block row has its one in column (r + shift) mod q of the block column.
// The shift values of the reference code are not published, so this design uses
// the array-code rule ((b+1)(j+1)) mod q, which is free of 4-cycles for prime q.
//
// Messages are sign-magnitude with a 4-bit magnitude. The sign bit is the hard
// bit a message votes for: 1 means the bit is '1' (positive LLR of P(1)/P(0)).
package ldpc_pkg;

  // Default code geometry: (1270,635) QC-LDPC code, 5 x 10 circulants of 127.
  localparam int Q_DEF    = 127;
  localparam int JB_DEF   = 5;
  localparam int KB_DEF   = 10;
  localparam int IMAX_DEF = 15;

  // Message quantisation (this design's choice).
  localparam int MAG_W = 4;              // magnitude bits
  localparam int MSG_W = MAG_W + 1;      // sign + magnitude
  localparam int SUM_W = 8;              // VNU two's complement accumulator
  localparam logic [MAG_W-1:0] MAG_MAX = '1;

  typedef struct packed {
    logic             sgn;   // hard bit voted for (1 = '1')
    logic [MAG_W-1:0] mag;   // reliability
  } msg_t;

  // v2c message as it travels from a VNU to a CNU, together with the VNU's
  // hard decision z' so the syndrome can be formed in check-node order.
  typedef struct packed {
    logic zp;
    msg_t m;
  } v2c_t;

  // Default secret pattern w; the secret vector v of the modified algorithm is
  // w repeated over every block column (v_n = w[n mod q]).
  localparam logic [Q_DEF-1:0] V_PAT_DEF =
    127'h5A3C_96E1_0F7B_2D48_C6B1_E7F0_3A9D_4C25;

  // Cyclic shift of the circulant in block row b, block column j.
  function automatic int shift_of(int b, int j, int q);
    return ((b + 1) * (j + 1)) % q;
  endfunction

  // Index width for a count of n items (at least one bit).
  function automatic int idx_w(int n);
    return (n > 1) ? $clog2(n) : 1;
  endfunction

endpackage
