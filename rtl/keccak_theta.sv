// keccak_theta: the theta step of a Keccak-f[1600] round, pure combinational.
//
// For each column x the five lanes are XORed into a parity lane C[x]. Each
// lane (x, y) is then XORed with D[x] = C[x-1] ^ rotl(C[x+1], 1), indices
// mod 5. This spreads every bit over two neighbouring columns. The step is
// one of the four groups the round logic is drawn with (theta, rho||pi,
// chi, iota); its inside is the FIPS 202 definition.
//
// Interface: a_i state in, a_o state out, lane (x,y) at index x+5*y.
// Timing: no clock; two XOR levels for C, one for D, one for the lane.
module keccak_theta
  import keccak_pkg::*;
(
  input  state_t a_i,
  output state_t a_o
);

  lane_t c [5];
  lane_t d [5];

  always_comb begin
    for (int x = 0; x < 5; x++)
      c[x] = a_i[x] ^ a_i[x+5] ^ a_i[x+10] ^ a_i[x+15] ^ a_i[x+20];
    for (int x = 0; x < 5; x++)
      d[x] = c[(x+4)%5] ^ rotl(c[(x+1)%5], 1);
    for (int i = 0; i < 25; i++)
      a_o[i] = a_i[i] ^ d[i%5];
  end

endmodule
