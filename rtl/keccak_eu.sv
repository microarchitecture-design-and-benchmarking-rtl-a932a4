// keccak_eu: the Keccak-f execution unit that sits beside the standard
// execution unit in the execute stage.
//
// It holds the 200-byte state (keccak_state_regs) and the combinational
// round (keccak_round). When shatr_i is high in a cycle, the round whose
// index is round_i is applied to the whole state and the result is stored
// at the clock edge: one shatr, one round, one cycle, no stall. Software
// therefore runs 24 shatr instructions per Keccak-f permutation.
//
// The state is reached only by ordinary loads and stores, which the host
// pipeline performs in its memory stage (lane_* ports): a store writes one
// 64-bit lane, a load reads one. Absorbing a block is done by software
// (load lane, XOR message word, store lane), as is reading out the digest.
//
// Ordering: a store in MEM is older than a shatr that is in EX in the same
// cycle, yet both change the state at the same edge. The unit forwards the
// stored lane into the round input (bypass_o reports it), so the round sees
// the state with the store applied and its result then replaces the whole
// state. A load in MEM is older than the shatr in EX and reads the state
// before that round, which is the register value, so loads need no bypass.
// Stages, lane access by loads/stores and the bypass are this design's
// choices: the paper says only that the registers are managed by standard
// instructions and that the unit's result feeds the memory and write-back
// stages.
//
// Timing: lane_rdata_o is combinational from lane_ridx_i (a 25:1 mux on
// the registers); state updates at the rising edge.
module keccak_eu
  import keccak_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  // execute stage: shatr issue
  input  logic   shatr_i,
  input  round_t round_i,
  // memory stage: lane store
  input  logic   lane_we_i,
  input  lidx_t  lane_widx_i,
  input  lane_t  lane_wdata_i,
  // memory stage: lane load
  input  lidx_t  lane_ridx_i,
  output lane_t  lane_rdata_o,
  // status
  output logic   bypass_o
);

  state_t state_q, round_in, round_out;

  // Round input: register value with a same-cycle older store merged in.
  always_comb begin
    round_in = state_q;
    if (lane_we_i && lane_widx_i < LIDX_W'(N_LANES))
      round_in[lane_widx_i] = lane_wdata_i;
  end

  assign bypass_o = shatr_i && lane_we_i && lane_widx_i < LIDX_W'(N_LANES);

  keccak_round u_round (
    .state_i (round_in),
    .round_i (round_i),
    .state_o (round_out)
  );

  keccak_state_regs u_regs (
    .clk        (clk),
    .rst_n      (rst_n),
    .full_we_i  (shatr_i),
    .full_d_i   (round_out),
    .lane_we_i  (lane_we_i),
    .lane_idx_i (lane_widx_i),
    .lane_d_i   (lane_wdata_i),
    .state_o    (state_q)
  );

  assign lane_rdata_o = (lane_ridx_i < LIDX_W'(N_LANES)) ? state_q[lane_ridx_i] : '0;

  // Software is expected to pass round indices 0..23.
  a_round_range: assert property (@(posedge clk) disable iff (!rst_n)
    shatr_i |-> round_i < RND_W'(N_ROUNDS))
    else $error("shatr issued with round index %0d", round_i);

endmodule
