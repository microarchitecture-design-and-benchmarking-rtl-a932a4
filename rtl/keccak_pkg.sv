// keccak_pkg: types and constants shared by the SHA-3 round extension.
//
// The Keccak-f[1600] state is a 5 x 5 array of 64-bit lanes (200 bytes).
// Lane (x, y) is stored at index x + 5*y, the same order in which SHA-3
// software keeps the state in memory, so lane i is bytes 8*i .. 8*i+7 of
// the little-endian state. The round constants and rotation offsets are
// the standard FIPS 202 values; they are written out as tables here (the
// testbenches derive them again from the LFSR and the (x,y) walk that
// define them). The instruction encoding constants are this design's own
// choice: the paper only says that an unused opcode slot was taken.
package keccak_pkg;

  localparam int unsigned LANE_W   = 64;   // bits per lane
  localparam int unsigned N_LANES  = 25;   // 5 x 5 lanes = 200 bytes
  localparam int unsigned N_ROUNDS = 24;   // rounds of Keccak-f[1600]
  localparam int unsigned RND_W    = 5;    // width of a round index
  localparam int unsigned LIDX_W   = 5;    // width of a lane index

  typedef logic [LANE_W-1:0]           lane_t;
  typedef lane_t [N_LANES-1:0]         state_t;   // state[x+5*y]
  typedef logic [RND_W-1:0]            round_t;
  typedef logic [LIDX_W-1:0]           lidx_t;

  // shatr encoding (own choice): R-type in the custom-0 major opcode.
  localparam logic [6:0] OPC_CUSTOM0   = 7'b0001011;
  localparam logic [2:0] F3_SHATR      = 3'b000;
  localparam logic [6:0] F7_SHATR      = 7'b0000000;

  // Iota round constants RC[0..23] (FIPS 202).
  localparam lane_t RC [N_ROUNDS] = '{
    64'h0000000000000001, 64'h0000000000008082, 64'h800000000000808A,
    64'h8000000080008000, 64'h000000000000808B, 64'h0000000080000001,
    64'h8000000080008081, 64'h8000000000008009, 64'h000000000000008A,
    64'h0000000000000088, 64'h0000000080008009, 64'h000000008000000A,
    64'h000000008000808B, 64'h800000000000008B, 64'h8000000000008089,
    64'h8000000000008003, 64'h8000000000008002, 64'h8000000000000080,
    64'h000000000000800A, 64'h800000008000000A, 64'h8000000080008081,
    64'h8000000000008080, 64'h0000000080000001, 64'h8000000080008008
  };

  // Rho rotation offsets, indexed by x + 5*y (FIPS 202).
  localparam int unsigned RHO [N_LANES] = '{
     0,  1, 62, 28, 27,
    36, 44,  6, 55, 20,
     3, 10, 43, 25, 39,
    41, 45, 15, 21,  8,
    18,  2, 61, 56, 14
  };

  // Round constant for a round index; indices 24..31 give zero, so a
  // shatr with an out-of-range index applies theta..chi but no constant.
  function automatic lane_t round_const(round_t r);
    return (r < RND_W'(N_ROUNDS)) ? RC[r] : '0;
  endfunction

  // Rotate a lane left by n bits.
  function automatic lane_t rotl(lane_t v, int unsigned n);
    return (n == 0) ? v : ((v << n) | (v >> (LANE_W - n)));
  endfunction

endpackage
