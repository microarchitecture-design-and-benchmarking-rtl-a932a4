// tb_shatr_decoder: self-checking testbench for shatr_decoder.
//
// Builds the shatr word from its fields (custom-0 opcode, funct3 000,
// funct7 0000000) for every rs1 and random rd/rs2, checks that it is
// recognised and that rs1 is extracted; then checks that words differing
// in opcode, funct3 or funct7, and a set of standard RV64 instructions,
// are not recognised.
module tb_shatr_decoder;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  logic [31:0] instr;
  logic        is_shatr;
  logic [4:0]  rs1;

  shatr_decoder dut (.instr_i(instr), .is_shatr_o(is_shatr), .rs1_o(rs1));

  function automatic logic [31:0] rtype(logic [6:0] f7, logic [4:0] s2, logic [4:0] s1,
                                        logic [2:0] f3, logic [4:0] d, logic [6:0] op);
    return {f7, s2, s1, f3, d, op};
  endfunction

  task automatic expect_word(logic [31:0] w, logic exp, logic [4:0] exp_rs1);
    instr = w;
    @(posedge clk);
    checks++;
    if (is_shatr !== exp || (exp && rs1 !== exp_rs1)) begin
      failures++;
      $display("word %h: is_shatr=%b rs1=%0d", w, is_shatr, rs1);
    end
  endtask

  initial begin
    logic [31:0] w;
    for (int r = 0; r < 32; r++)
      expect_word(rtype(7'd0, 5'($urandom), 5'(r), 3'd0, 5'($urandom), 7'b0001011), 1'b1, 5'(r));
    for (int k = 0; k < 200; k++) begin
      w = rtype(7'd0, 5'($urandom), 5'($urandom), 3'd0, 5'($urandom), 7'b0001011);
      case ($urandom_range(0, 2))
        0: w[6:0]   = w[6:0]   ^ 7'(1 << $urandom_range(0, 6));
        1: w[14:12] = w[14:12] ^ 3'(1 << $urandom_range(0, 2));
        default: w[31:25] = w[31:25] ^ 7'(1 << $urandom_range(0, 6));
      endcase
      expect_word(w, 1'b0, 5'd0);
    end
    expect_word(32'h00000013, 1'b0, 5'd0);  // addi x0,x0,0
    expect_word(32'h00b50533, 1'b0, 5'd0);  // add a0,a0,a1
    expect_word(32'h0005b503, 1'b0, 5'd0);  // ld a0,0(a1)
    expect_word(32'h00a5b023, 1'b0, 5'd0);  // sd a0,0(a1)
    expect_word(32'h0000100b, 1'b0, 5'd0);  // custom-0, funct3=001
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
