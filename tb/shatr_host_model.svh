// shatr_host_model.svh: a host-core model shared by the end-to-end
// testbenches of shatr_ext_top. It is included inside a testbench module,
// instantiates the extension as "dut" and provides:
//   - a copy of the host's ID, EX and MEM stages as an op pipeline, which
//     drives the instruction word, rs1 value, stall, flush and the
//     memory-stage load/store ports, and advances one stage per clock
//     (stall: ID and EX hold, MEM gets a bubble; flush: ID and EX killed);
//   - a state model, built on keccak_ref_pkg, that predicts every lane
//     load, every shatr and the bypass flag, and counts each mechanism;
//   - hash(): the SHA-3 sponge as software would run it with shatr
//     (25 stores to clear, per block load/XOR/store of the rate lanes and
//     24 shatr, then loads of the digest lanes; with flush_en set, a pair
//     of wrong-path shatr that the host flushes may precede the rounds);
//   - run_case(): hash() checked against keccak_ref_pkg::sha3 and,
//     optionally, a known digest.
// It also declares the clock, the reset and the checks/failures counters.

  localparam logic [63:0] BASE = 64'h0000_0000_4000_0000;

  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  typedef enum logic [2:0] {K_NOP, K_SHATR, K_LD, K_SD, K_LDX, K_SDX, K_ALU} kind_t;
  typedef struct {
    logic  v;
    kind_t kind;
    int    lane;
    lane_t data;
    int    rnd;
    logic  wp;      // wrong-path op, flushed when it reaches EX
  } op_t;

  // DUT ports
  logic        rst_n;
  logic        id_valid, id_is_shatr, ex_stall, ex_flush;
  logic [31:0] id_instr;
  logic [63:0] id_rs1_data, mem_addr, mem_wdata, mem_rdata;
  logic [4:0]  id_rs1;
  logic        mem_valid, mem_we, mem_hit, fire, bypass;

  shatr_ext_top dut (
    .clk(clk), .rst_n(rst_n),
    .id_valid_i(id_valid), .id_instr_i(id_instr), .id_rs1_data_i(id_rs1_data),
    .id_is_shatr_o(id_is_shatr), .id_rs1_o(id_rs1),
    .ex_stall_i(ex_stall), .ex_flush_i(ex_flush),
    .mem_valid_i(mem_valid), .mem_we_i(mem_we), .mem_addr_i(mem_addr),
    .mem_wdata_i(mem_wdata), .mem_hit_o(mem_hit), .mem_rdata_o(mem_rdata),
    .ex_shatr_fire_o(fire), .bypass_o(bypass)
  );

  // ---------------- host pipeline model ----------------
  op_t   prog[$];
  op_t   id_op, ex_op, mem_op;
  lane_t ld_results[$];
  flat_t model;
  logic  stall_en = 0;
  logic  stall_r  = 0;
  logic  flush_en = 0;   // hash() then injects flushed wrong-path shatr pairs

  // mechanism counters
  int n_shatr = 0, n_bypass = 0, n_stall = 0, n_flush = 0;
  int n_ld = 0, n_sd = 0, n_miss = 0, n_alu = 0, n_perm24 = 0;
  int run_len = 0;

  function automatic op_t bubble();
    op_t o;
    o.v = 0; o.kind = K_NOP; o.lane = 0; o.data = '0; o.rnd = 0; o.wp = 0;
    return o;
  endfunction

  function automatic logic [31:0] encode(op_t o);
    case (o.kind)
      K_SHATR: return {7'b0, 5'd0, 5'd10, 3'b000, 5'd0, 7'b0001011}; // shatr a0
      K_LD, K_LDX: return 32'h0005b503;  // ld a0,0(a1)
      K_SD, K_SDX: return 32'h00a5b023;  // sd a0,0(a1)
      default: return 32'h00b50533;      // add a0,a0,a1
    endcase
  endfunction

  // ID and MEM port drive
  always_comb begin
    id_valid    = id_op.v;
    id_instr    = encode(id_op);
    id_rs1_data = 64'(id_op.rnd);
    mem_valid   = mem_op.v && mem_op.kind inside {K_LD, K_SD, K_LDX, K_SDX};
    mem_we      = mem_op.kind inside {K_SD, K_SDX};
    mem_addr    = (mem_op.kind inside {K_LDX, K_SDX}) ? 64'h8000_0000 + 64'(8*mem_op.lane)
                                                      : BASE + 64'(8*mem_op.lane);
    mem_wdata   = mem_op.data;
    ex_flush    = ex_op.v && ex_op.wp;
    ex_stall    = stall_r && !ex_flush;
  end

  task automatic chk(logic ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("%0t FAIL %s", $time, what);
    end
  endtask

  always @(posedge clk) if (rst_n) begin : pipe
    flat_t nxt;
    logic  exp_fire, exp_byp;
    // ---- checks of this cycle's combinational outputs ----
    if (id_op.v) chk(id_is_shatr === (id_op.kind == K_SHATR), "decode");
    if (id_op.v && id_op.kind == K_ALU) n_alu++;
    exp_fire = ex_op.v && ex_op.kind == K_SHATR && !ex_stall && !ex_flush;
    chk(fire === exp_fire, "shatr fire");
    exp_byp  = exp_fire && mem_op.v && mem_op.kind == K_SD;
    chk(bypass === exp_byp, "bypass flag");
    if (ex_op.v && ex_op.kind == K_SHATR && ex_stall) n_stall++;
    if (ex_flush && ex_op.kind == K_SHATR) n_flush++;
    nxt = model;
    if (mem_op.v) begin
      case (mem_op.kind)
        K_LD: begin
          chk(mem_hit === 1'b1 && mem_rdata === model[mem_op.lane], "lane load");
          ld_results.push_back(mem_rdata);
          n_ld++;
        end
        K_SD: begin
          chk(mem_hit === 1'b1, "lane store hit");
          nxt[mem_op.lane] = mem_op.data;
          n_sd++;
        end
        K_LDX, K_SDX: begin
          chk(mem_hit === 1'b0, "access outside window");
          n_miss++;
        end
        default: ;
      endcase
    end
    if (exp_fire) begin
      nxt = ref_round(nxt, ex_op.rnd);
      n_shatr++;
      n_bypass += int'(exp_byp);
    end
    model = nxt;
    // 24 consecutive rounds 0..23 with no gap
    if (exp_fire && ex_op.rnd == run_len) run_len++;
    else if (exp_fire && ex_op.rnd == 0)  run_len = 1;
    else                                  run_len = 0;
    if (run_len == 24) begin n_perm24++; run_len = 0; end
    // ---- advance the host pipeline ----
    if (ex_flush) begin
      mem_op <= bubble();
      ex_op  <= bubble();
      id_op  <= bubble();
    end else if (ex_stall) begin
      mem_op <= bubble();
    end else begin
      mem_op <= ex_op;
      ex_op  <= id_op;
      id_op  <= (prog.size() > 0) ? prog.pop_front() : bubble();
    end
  end

  always @(negedge clk) stall_r <= stall_en && ($urandom_range(0, 3) == 0);

  // ---------------- software ----------------
  function automatic op_t mk(kind_t k, int lane = 0, lane_t d = '0, int r = 0, logic wp = 0);
    op_t o;
    o.v = 1; o.kind = k; o.lane = lane; o.data = d; o.rnd = r; o.wp = wp;
    return o;
  endfunction

  task automatic drain();
    while (prog.size() > 0 || id_op.v || ex_op.v || mem_op.v) @(posedge clk);
    @(posedge clk);
  endtask

  task automatic hash(byte unsigned msg[$], int dbytes, output byte unsigned dig[$]);
    int rate = 200 - 2*dbytes;
    byte unsigned p[$];
    lane_t w;
    p = msg;
    p.push_back(8'h06);
    while (p.size() % rate != 0) p.push_back(8'h00);
    p[p.size()-1] |= 8'h80;
    for (int i = 0; i < 25; i++) prog.push_back(mk(K_SD, i, '0));
    for (int blk = 0; blk < p.size(); blk += rate) begin
      ld_results.delete();
      for (int i = 0; i < rate/8; i++) prog.push_back(mk(K_LD, i));
      if ($urandom_range(0, 1) == 0) prog.push_back(mk(K_ALU));
      drain();
      for (int i = 0; i < rate/8; i++) begin
        for (int b = 0; b < 8; b++) w[8*b +: 8] = p[blk + 8*i + b];
        prog.push_back(mk(K_SD, i, ld_results[i] ^ w));
      end
      if (flush_en && $urandom_range(0, 1) == 0) begin
        prog.push_back(mk(K_SHATR, 0, '0, $urandom_range(0, 23), 1));
        prog.push_back(mk(K_SHATR, 0, '0, $urandom_range(0, 23), 1));
      end
      for (int r = 0; r < 24; r++) prog.push_back(mk(K_SHATR, 0, '0, r));
    end
    ld_results.delete();
    for (int i = 0; i < (dbytes+7)/8; i++) prog.push_back(mk(K_LD, i));
    drain();
    dig.delete();
    for (int i = 0; i < dbytes; i++) dig.push_back(ld_results[i/8][8*(i%8) +: 8]);
  endtask

  task automatic run_case(byte unsigned msg[$], int dbytes, string name, logic [511:0] kat, logic use_kat);
    byte unsigned got[$], exp[$];
    logic ok;
    hash(msg, dbytes, got);
    sha3(msg, dbytes, exp);
    ok = (got == exp);
    if (use_kat)
      for (int i = 0; i < dbytes; i++) ok &= (exp[i] == kat[8*(dbytes-1-i) +: 8]);
    chk(ok, $sformatf("digest %s (%0d-bit, %0d-byte message)", name, 8*dbytes, msg.size()));
  endtask

