// keccak_chi: the chi step of a Keccak-f[1600] round, pure combinational.
//
// The only non-linear step: along each row y, lane x becomes
// b[x] ^ (~b[x+1] & b[x+2]) with x mod 5. Its inside is the FIPS 202
// definition; the paper names the step as part of the round logic.
//
// Interface: b_i state in, a_o state out, lane (x,y) at index x+5*y.
// Timing: no clock; one AND-NOT and one XOR level.
module keccak_chi
  import keccak_pkg::*;
(
  input  state_t b_i,
  output state_t a_o
);

  always_comb begin
    for (int y = 0; y < 5; y++)
      for (int x = 0; x < 5; x++)
        a_o[x+5*y] = b_i[x+5*y] ^ (~b_i[(x+1)%5 + 5*y] & b_i[(x+2)%5 + 5*y]);
  end

endmodule
