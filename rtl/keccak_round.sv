// keccak_round: one complete Keccak-f[1600] round as combinational logic.
//
// This is the datapath behind one shatr instruction: theta, rho||pi, chi
// and iota chained without registers, so the 200-byte state goes through a
// whole round in one clock cycle of the execute stage. Running it 24 times
// with round indices 0..23 is the full permutation. The chain of four
// groups is the one drawn for the unit; the insides of each group are the
// FIPS 202 steps.
//
// Interface: state_i in, round_i round index (0..23), state_o out.
// Timing: no clock; depth is theta (about 4 XOR levels) + chi (2) + iota (1).
module keccak_round
  import keccak_pkg::*;
(
  input  state_t state_i,
  input  round_t round_i,
  output state_t state_o
);

  state_t s_theta, s_rhopi, s_chi;

  keccak_theta  u_theta  (.a_i(state_i), .a_o(s_theta));
  keccak_rho_pi u_rho_pi (.a_i(s_theta), .b_o(s_rhopi));
  keccak_chi    u_chi    (.b_i(s_rhopi), .a_o(s_chi));
  keccak_iota   u_iota   (.a_i(s_chi), .round_i(round_i), .a_o(state_o));

endmodule
