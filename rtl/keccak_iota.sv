// keccak_iota: the iota step of a Keccak-f[1600] round.
//
// XORs the round constant RC[round_i] into lane (0,0) and passes the other
// 24 lanes through. The constant is chosen by the round index that the
// shatr instruction carries in its rs1 operand (this design's choice; the
// paper does not say how the round number reaches the unit). Indices 24..31
// select a zero constant.
//
// Interface: a_i state in, round_i round index, a_o state out.
// Timing: no clock; a 24-entry constant mux and one XOR on lane 0.
module keccak_iota
  import keccak_pkg::*;
(
  input  state_t a_i,
  input  round_t round_i,
  output state_t a_o
);

  always_comb begin
    a_o    = a_i;
    a_o[0] = a_i[0] ^ round_const(round_i);
  end

endmodule
