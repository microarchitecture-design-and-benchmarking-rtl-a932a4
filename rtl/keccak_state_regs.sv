// keccak_state_regs: the 200-byte internal state register of the Keccak-f
// execution unit.
//
// Twenty-five 64-bit lanes of flip-flops (1600 bits, the 200 bytes the
// paper adds inside the unit). Two write paths share the array: a full
// parallel load of all 25 lanes, used when a shatr round completes, and a
// single-lane write, used when a standard store moves data into the state.
// If both are asked for in one cycle the full load wins; the execution unit
// has already merged the lane write into the value it loads. The whole
// state is always visible on state_o, so the round logic reads all lanes in
// parallel while a lane read needs only a 25:1 mux outside.
//
// Reset clears the state to zero, the starting value of the sponge (the
// paper's sponge figure starts from r=0, c=0); after a hash software clears
// it again by storing zeros. Reset is asynchronous, active low.
//
// Timing: writes take effect at the rising clock edge; state_o is the
// register output.
module keccak_state_regs
  import keccak_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  input  logic   full_we_i,    // load all lanes from full_d_i
  input  state_t full_d_i,
  input  logic   lane_we_i,    // write one lane
  input  lidx_t  lane_idx_i,   // 0..24; larger indices are ignored
  input  lane_t  lane_d_i,
  output state_t state_o
);

  state_t q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)
      q <= '0;
    else if (full_we_i)
      q <= full_d_i;
    else if (lane_we_i && lane_idx_i < LIDX_W'(N_LANES))
      q[lane_idx_i] <= lane_d_i;
  end

  assign state_o = q;

endmodule
