# shatr: a one-round-per-instruction SHA-3 extension for a RISC-V pipeline

SHA-3 spends nearly all of its time in the Keccak-f[1600] permutation: 24
rounds of XOR, AND-NOT and rotate operations on a 200-byte state. On a
plain 64-bit RISC-V core, one round takes well over a hundred ALU, load and
store instructions. The rest of the algorithm (padding, splitting the
message into blocks, XORing each block into the state, copying out the
digest) is ordinary data movement that a CPU already handles well.

This RTL adds a single instruction, `shatr`, that performs **one complete
Keccak-f round in one execute-stage cycle**, on a 200-byte state held in
flip-flops inside the execution unit. Software keeps everything else:
it absorbs message words into the state and reads the digest with normal
64-bit loads and stores, and runs a permutation as 24 `shatr` instructions
with round indices 0 to 23.

The design follows the microarchitecture in *Microarchitecture Design and
Benchmarking of Custom SHA-3 Instruction for RISC-V* (Bolat, Sezer,
McLaughlin, Hui). That paper fixes the idea, the round logic, the 200-byte
internal state and the place of the unit in a five-stage pipeline. It does
not give the encoding, the operand use, the way standard instructions reach
the state, or the pipeline hazards. Those are this design's own choices,
marked as such below and in each file's header.

## 1. How software uses it

### The instruction

| field | bits | value |
|---|---|---|
| funct7 | 31:25 | `0000000` |
| rs2 | 24:20 | ignored |
| rs1 | 19:15 | register holding the round index (bits 4:0 are used) |
| funct3 | 14:12 | `000` |
| rd | 11:7 | ignored, no register is written |
| opcode | 6:0 | `0001011` (custom-0) |

`shatr rs1` replaces the state S with `Round(S, rs1[4:0])`. Indices 24 to
31 apply theta, rho, pi and chi with a zero round constant. An assertion
in `keccak_eu` reports them in simulation.

### The state window

The 25 lanes of the state are visible as 25 doublewords in a 200-byte
window starting at `LANE_BASE` (default `0x4000_0000`). Lane (x, y) is at
`LANE_BASE + 8*(x + 5*y)`. This is the order in which SHA-3 software keeps
its state, so byte *i* of the window is byte *i* of the FIPS 202 state.
Only aligned 64-bit `ld`/`sd` are served. Other sizes or misaligned
addresses in the window are not claimed (`mem_hit_o` stays low) and go to
the host's memory system.

### A hash, as the testbenches run it

```
    # clear: 25 x  sd zero, 8*i(base)
    for each rate-sized block of the padded message:
        for i in 0 .. rate/8-1:
            ld   t, 8*i(base)          # lane i
            xor  t, t, msg_word[i]
            sd   t, 8*i(base)
        for r in 0 .. 23:
            li   a0, r
            shatr a0                    # one round
    for i in 0 .. digest/8-1:
        ld   t, 8*i(base)              # digest lanes
```

The rate is 144, 136, 104 or 72 bytes for SHA3-224, -256, -384 and -512.
Padding uses the SHA-3 domain byte `0x06` and sets the top bit of the last
byte of the block. All of this is software. The hardware sees only
`shatr`, loads and stores.

## 2. The round datapath

One round is one pass through four combinational groups, with no register
between them. This split follows the paper's drawing of the unit:

| module | step | what it does | cost |
|---|---|---|---|
| `keccak_theta` | θ | C[x] = XOR of column x; every lane ^= C[x-1] ^ rotl(C[x+1],1) | 5-input XOR trees, 2 XOR levels |
| `keccak_rho_pi` | ρ‖π | lane (x,y) rotated by RHO[x+5y] and moved to (y, 2x+3y mod 5) | wires only |
| `keccak_chi` | χ | a[x] = b[x] ^ (~b[x+1] & b[x+2]) along each row | 1 AND-NOT + 1 XOR |
| `keccak_iota` | ι | lane 0 ^= RC[round] | 24:1 constant mux + XOR |

`keccak_round` chains them. The step equations, rotation offsets and round
constants are those of FIPS 202. They are held as tables in
`keccak_pkg`. The testbenches recompute them independently: the round
constants from the degree-8 LFSR `x^8 + x^6 + x^5 + x^4 + 1`, and the
offsets from the walk (x,y) → (y, 2x+3y) with offset (t+1)(t+2)/2 mod 64.

The critical path is theta (a 5-input and then 3-input XOR per bit),
chi (2 levels) and iota (1 XOR on lane 0). That is about 6 to 7 logic
levels, small next to a 64-bit adder. This agrees with the paper's report
that the unit did not lengthen the core's critical path at 50 MHz on a
Kintex-7. No timing was run on this RTL.

## 3. Placement in the pipeline: the part to read carefully

```
 FETCH | DECODE          | EXECUTE                 | MEMORY                 | WRITE-BACK
       | shatr_decoder   | keccak_eu: round logic  | lane window:           | host WB mux takes
       |   id_is_shatr_o |   state <= Round(state) |   ld -> mem_rdata_o    |   mem_rdata_o when
       | rs1 read (host) |                         |   sd -> state[lane]    |   mem_hit_o was set
       |  -> ID/EX reg    |                         |                        |
```

The state is written from two stages:

- **EX:** a `shatr` replaces the whole state at the end of its EX cycle.
- **MEM:** a store to the window replaces one lane at the end of its MEM
  cycle.

Loads read the state in MEM, combinationally, and return it in the same
cycle.

**Store followed by shatr.** The usual sequence ends a block with
`sd lane; shatr 0`. In cycle *t* the store is in MEM and the `shatr` is in
EX, and both want to write the state at the same edge. The store is the
older instruction, so the round must see its data. `keccak_eu` therefore
merges the MEM-stage store lane into the round's input ("bypass"). The
round result, which already includes the store, then overwrites the whole
state. `bypass_o` reports the event. No stall is needed.

**shatr followed by load.** A load that follows a `shatr` reaches MEM at
least one cycle after the `shatr` left EX, so the state register already
holds the new round. A load that is older than a `shatr` is in MEM while
the `shatr` is in EX. It reads the register before the edge, which is the
pre-round value, as program order requires. Neither case needs
forwarding.

**shatr followed by shatr.** Each round reads the register the previous
round wrote one cycle earlier. 24 back-to-back `shatr` take 24
consecutive EX cycles.

**Stall (`ex_stall_i`).** The ID/EX register holds. A `shatr` waiting in
EX does not execute until the stall ends, and then executes exactly once.

**Flush (`ex_flush_i`).** This is for a trap or redirect raised at MEM.
It kills the instructions in ID and EX, so a wrong-path `shatr` never
touches the state. Flush wins over stall. The host must also suppress its
own faulting store (`mem_valid_i` low).

The extension never asks the host to stall. Apart from the word it
decodes and the doubleword it returns, it keeps no architectural state
other than the 200 bytes. An OS that context-switches processes using
`shatr` saves and restores the state with 25 loads and 25 stores through
the window.

## 4. Modules

```
shatr_ext_top              ID decode, ID/EX register, lane-window decode
├── shatr_decoder          recognises shatr (custom-0, funct3 0, funct7 0)
└── keccak_eu              Keccak-f execution unit, bypass, range assertion
    ├── keccak_round       one full round, combinational
    │   ├── keccak_theta
    │   ├── keccak_rho_pi
    │   ├── keccak_chi
    │   └── keccak_iota
    └── keccak_state_regs  25 x 64 flip-flops, full load + lane write
keccak_pkg                 lane/state types, RC and RHO tables, encoding
```

### Ports of `shatr_ext_top`

| port | dir | width | meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock; asynchronous active-low reset (clears the state) |
| `id_valid_i`, `id_instr_i` | in | 1, 32 | instruction in ID |
| `id_rs1_data_i` | in | XLEN | rs1 value read by the host in ID |
| `id_is_shatr_o` | out | 1 | ID holds `shatr`: legal, writes no register |
| `id_rs1_o` | out | 5 | rs1 field for the host register-file port |
| `ex_stall_i`, `ex_flush_i` | in | 1 | see section 3 |
| `mem_valid_i`, `mem_we_i` | in | 1 | a load/store is in MEM |
| `mem_addr_i`, `mem_wdata_i` | in | XLEN | its address and store data |
| `mem_hit_o` | out | 1 | address is a lane: served here, not by the cache |
| `mem_rdata_o` | out | XLEN | load data for the host's write-back mux |
| `ex_shatr_fire_o`, `bypass_o` | out | 1 | status: a round ran / a store was forwarded |

Parameters: `XLEN` (64) and `LANE_BASE` (`64'h4000_0000`). The lane
width, lane count and round count are fixed by Keccak-f[1600] and live in
`keccak_pkg`.

### What the host core must do

The fetch stage, register file, ALU, caches, pipeline registers and
result muxes belong to the host core and are not part of this RTL. To
integrate the extension, the host must:

1. treat a word with `id_is_shatr_o` as legal and as writing no register;
2. read rs1 for it as for any R-type instruction, with the usual
   forwarding;
3. route loads and stores with `mem_hit_o` away from the data cache, and
   take `mem_rdata_o` into write-back for loads;
4. drive `ex_stall_i` and `ex_flush_i` from its hazard and trap logic.

## 5. Size

Synthesis of `shatr_ext_top` gives 1,606 flip-flops: 1,600 for the state
and 6 for the ID/EX valid bit and round index. The logic is about 76
64-bit XOR cells, 25 AND-NOT cells, a 25:1 lane-read mux and the window
comparator. The paper reports +8,182 flip-flops and +9,363 LUTs for its
integration into CVA6 on a Kintex-7. That figure includes integration
work inside the CVA6 that the paper does not describe, so the two
numbers are not comparable one for one.

## 6. Verification

Every module has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M` and stops itself through a watchdog if it
hangs. The reference model is `tb/keccak_ref_pkg.sv`. It is written
independently of the RTL: a 5x5 array, constants derived rather than
tabled, and a full `sha3()` sponge.

| testbench | what it shows |
|---|---|
| `tb_keccak_theta`, `_rho_pi`, `_chi`, `_iota` | each step against the reference on 327 states (zero, all-ones, single-bit, random), all 32 round indices for iota |
| `tb_keccak_round` | random rounds; 24 chained rounds on the zero state equal the published Keccak-f[1600] test vector (lane 0 = `F1258F7940E1DDE7`) |
| `tb_keccak_state_regs` | full loads, lane writes, out-of-range lanes, priority, reset |
| `tb_keccak_eu` | random mixes of shatr, store and load each cycle: one-cycle rounds, bypass, load timing, a full permutation |
| `tb_shatr_decoder` | shatr for every rs1; single-bit changes of opcode/funct3/funct7 and standard RV64 words are rejected |
| `tb_shatr_ext_top` | end to end through a host pipeline model (`tb/shatr_host_model.svh`): SHA3-224/256/384/512("abc") and SHA3-256("") against FIPS 202 digests, random short and multi-block messages under random stalls, flushed wrong-path shatr, accesses outside the window; each of these mechanisms is counted and must occur |
| `tb_sha3_workloads` | all four SHA-3 sizes: every message length 0..rate bytes, long messages, and, per size and per short/long set, exactly as many rounds as the evaluation's data sets executed (15,768 to 810,480; 2.2 million rounds in total), every digest checked (about 30 s) |

All of them run at the default parameters. To run one with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/keccak_pkg.sv tb/keccak_ref_pkg.sv tb/tb_shatr_ext_top.sv \
    --top-module tb_shatr_ext_top
./obj_dir/Vtb_shatr_ext_top
```

Replace the last file and the top name for another testbench. The
testbenches use only `$urandom`, with no constraint solver and no DPI.

## 7. Where this design departs from the paper, and how far to trust it

- **State access.** The paper keeps the 200 bytes as "vector-like"
  internal registers that standard instructions manage, and it does not
  say how. Here they are a memory-mapped window of 25 doublewords served
  in the MEM stage. A host with vector registers could instead map them
  onto those. Only `shatr_ext_top`'s window decode would change.
- **Round selection.** The paper does not say how each `shatr` knows
  its round number. Here it comes from rs1. An internal counter would
  save the `li`, but it would add hidden state that could fall out of
  step after a trap.
- **Encoding.** The paper only says an unused opcode was taken. Here it
  is custom-0, funct3 0, funct7 0.
- **Hazards, stall and flush.** The paper does not discuss them. The
  bypass and the port semantics in section 3 are this design's own.
- **Not included.** The host core (the paper uses CVA6 on the FPGA and a
  modified GEM5 CPU model for the cycle counts), its caches and memory,
  and the compiler and assembler support.
- **Trust.** The round function is checked bit for bit against an
  independent model and the published permutation and digest vectors.
  The pipeline behaviour is checked against the host model in `tb/`,
  whose stage timing is an assumption about the host. A real integration
  must recheck it against that core's own stall and forwarding rules.
  Each testbench has also been run against a deliberately broken copy of
  its module and fails there.
