// keccak_rho_pi: the rho and pi steps of a Keccak-f[1600] round, merged.
//
// Rho rotates lane (x, y) left by a fixed offset RHO[x+5y]; pi moves it to
// position (y, 2x+3y mod 5). Both are pure rewiring, so together they cost
// no gates at all, which is why the round logic groups them as one block
// (rho||pi). Offsets and the permutation follow FIPS 202.
//
// Interface: a_i state in, b_o state out, lane (x,y) at index x+5*y.
// Timing: no clock, no logic levels.
module keccak_rho_pi
  import keccak_pkg::*;
(
  input  state_t a_i,
  output state_t b_o
);

  for (genvar x = 0; x < 5; x++) begin : g_x
    for (genvar y = 0; y < 5; y++) begin : g_y
      localparam int unsigned SRC = x + 5*y;
      localparam int unsigned DST = y + 5*((2*x + 3*y) % 5);
      assign b_o[DST] = rotl(a_i[SRC], RHO[SRC]);
    end
  end

endmodule
