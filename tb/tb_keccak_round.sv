// tb_keccak_round: self-checking testbench for keccak_round.
//
// Part 1: random states and round indices against the reference round.
// Part 2: the full permutation, feeding the output back 24 times with
// indices 0..23, starting from the zero state; the result must equal the
// published Keccak-f[1600] test vector for the zero state and the
// reference permutation.
module tb_keccak_round;
  import keccak_pkg::*;
  import keccak_ref_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  state_t din, dout;
  round_t rnd;

  keccak_round dut (.state_i(din), .round_i(rnd), .state_o(dout));

  // Keccak-f[1600] applied to the all-zero state, lanes 0..24.
  localparam logic [63:0] KAT [25] = '{
    64'hF1258F7940E1DDE7, 64'h84D5CCF933C0478A, 64'hD598261EA65AA9EE,
    64'hBD1547306F80494D, 64'h8B284E056253D057, 64'hFF97A42D7F8E6FD4,
    64'h90FEE5A0A44647C4, 64'h8C5BDA0CD6192E76, 64'hAD30A6F71B19059C,
    64'h30935AB7D08FFC64, 64'hEB5AA93F2317D635, 64'hA9A6E6260D712103,
    64'h81A57C16DBCF555F, 64'h43B831CD0347C826, 64'h01F22F1A11A5569F,
    64'h05E5635A21D9AE61, 64'h64BEFEF28CC970F2, 64'h613670957BC46611,
    64'hB87C5A554FD00ECB, 64'h8C3EE88A1CCF32C8, 64'h940C7922AE3A2614,
    64'h1841F924A2C509E4, 64'h16F53526E70465C2, 64'h75F644E97F30A13B,
    64'hEAF1FF7B5CECA249
  };

  initial begin
    flat_t exp, s;
    for (int k = 0; k < 200; k++) begin
      din = rand_state();
      rnd = round_t'($urandom_range(0, 23));
      @(posedge clk);
      exp = ref_round(din, int'(rnd));
      checks++;
      if (dout !== exp) begin
        failures++;
        if (failures < 4) $display("round %0d mismatch", rnd);
      end
    end
    s = '0;
    for (int r = 0; r < 24; r++) begin
      din = s;
      rnd = round_t'(r);
      @(posedge clk);
      s = dout;
    end
    exp = ref_permute('0);
    checks++;
    if (s !== exp) begin
      failures++;
      $display("permutation differs from reference");
    end
    for (int i = 0; i < 25; i++) begin
      checks++;
      if (s[i] !== KAT[i]) begin
        failures++;
        $display("KAT lane %0d got %h exp %h", i, s[i], KAT[i]);
      end
    end
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
