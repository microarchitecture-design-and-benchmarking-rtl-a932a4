// shatr_ext_top: the SHA-3 round extension as it is inserted into a
// five-stage RISC-V pipeline (fetch, decode, execute, memory, write-back).
//
// The host core is not part of this design; this module holds everything
// the extension adds to it and is wired to the host through plain ports:
//
//   decode     shatr_decoder recognises shatr in the fetched word and tells
//              the host (id_is_shatr_o) so it treats the word as legal and
//              writes no integer register. The host reads rs1 (the round
//              index) from its register file as for any instruction.
//   ID/EX      a valid bit and the 5-bit round index, held on ex_stall_i
//              and cleared by ex_flush_i (a flush wins over a stall).
//   execute    keccak_eu performs one Keccak-f[1600] round on its 200-byte
//              internal state when a shatr is in EX and the stage moves on.
//   memory     loads and stores (64-bit, 8-byte aligned) whose address falls
//              in the 200-byte window at LANE_BASE are served by the state
//              instead of the data cache: mem_hit_o tells the host to take
//              mem_rdata_o into its write-back mux and to keep the access
//              away from the cache. Lane i sits at LANE_BASE + 8*i.
//
// What follows the paper: one shatr is one round, done by combinational
// logic in the execute stage; 24 shatr make a permutation; the state lives
// in 200 bytes of registers inside the unit; the registers are filled and
// read by standard instructions; the unit's output reaches the memory and
// write-back stages. This design's own choices: the opcode, the round index
// in rs1, the memory-mapped lane window and its base address, the
// store-to-shatr bypass, and the stall/flush port semantics.
//
// Timing: a shatr decoded in cycle t changes the state at the end of cycle
// t+1 (its EX cycle); a load in MEM returns the lane combinationally in the
// same cycle; there is no extra latency and the extension never stalls the
// pipeline.
module shatr_ext_top
  import keccak_pkg::*;
#(
  parameter int unsigned       XLEN      = 64,
  parameter logic [XLEN-1:0]   LANE_BASE = XLEN'(64'h0000_0000_4000_0000)
) (
  input  logic            clk,
  input  logic            rst_n,
  // decode stage
  input  logic            id_valid_i,
  input  logic [31:0]     id_instr_i,
  input  logic [XLEN-1:0] id_rs1_data_i,
  output logic            id_is_shatr_o,
  output logic [4:0]      id_rs1_o,
  // pipeline control from the host
  input  logic            ex_stall_i,
  input  logic            ex_flush_i,
  // memory stage
  input  logic            mem_valid_i,
  input  logic            mem_we_i,
  input  logic [XLEN-1:0] mem_addr_i,
  input  logic [XLEN-1:0] mem_wdata_i,
  output logic            mem_hit_o,
  output logic [XLEN-1:0] mem_rdata_o,
  // status
  output logic            ex_shatr_fire_o,
  output logic            bypass_o
);

  // ---------------- decode ----------------
  shatr_decoder u_dec (
    .instr_i    (id_instr_i),
    .is_shatr_o (id_is_shatr_o),
    .rs1_o      (id_rs1_o)
  );

  // ---------------- ID/EX register ----------------
  typedef struct packed {
    logic   valid;
    round_t round;
  } idex_t;

  idex_t idex_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)
      idex_q <= '0;
    else if (ex_flush_i)
      idex_q <= '0;
    else if (!ex_stall_i)
      idex_q <= '{valid: id_valid_i && id_is_shatr_o,
                  round: id_rs1_data_i[RND_W-1:0]};
  end

  assign ex_shatr_fire_o = idex_q.valid && !ex_stall_i && !ex_flush_i;

  // ---------------- memory-stage lane window ----------------
  logic [XLEN-1:0] offset;
  logic            in_window;
  lidx_t           lane_idx;

  assign offset    = mem_addr_i - LANE_BASE;
  assign in_window = mem_addr_i >= LANE_BASE &&
                     offset < XLEN'(N_LANES * 8) &&
                     offset[2:0] == 3'b000;
  assign lane_idx  = offset[LIDX_W+2:3];
  assign mem_hit_o = mem_valid_i && in_window;

  lane_t lane_rdata;

  keccak_eu u_eu (
    .clk          (clk),
    .rst_n        (rst_n),
    .shatr_i      (ex_shatr_fire_o),
    .round_i      (idex_q.round),
    .lane_we_i    (mem_hit_o && mem_we_i),
    .lane_widx_i  (lane_idx),
    .lane_wdata_i (lane_t'(mem_wdata_i)),
    .lane_ridx_i  (lane_idx),
    .lane_rdata_o (lane_rdata),
    .bypass_o     (bypass_o)
  );

  assign mem_rdata_o = (mem_hit_o && !mem_we_i) ? XLEN'(lane_rdata) : '0;

endmodule
