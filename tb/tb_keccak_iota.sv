// tb_keccak_iota: self-checking testbench for keccak_iota.
//
// For every round index 0..31 and several random states, checks that lane
// 0 is XORed with the round constant the reference derives from the FIPS
// 202 LFSR (zero for indices 24..31) and that lanes 1..24 pass unchanged.
module tb_keccak_iota;
  import keccak_pkg::*;
  import keccak_ref_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  state_t din, dout;
  round_t rnd;

  keccak_iota dut (.a_i(din), .round_i(rnd), .a_o(dout));

  initial begin
    flat_t exp;
    for (int k = 0; k < 8; k++) begin
      for (int r = 0; r < 32; r++) begin
        din = (k == 0) ? '0 : rand_state();
        rnd = round_t'(r);
        @(posedge clk);
        exp = ref_iota(din, r);
        checks++;
        if (dout !== exp) begin
          failures++;
          $display("round %0d: lane0 got %h exp %h", r, dout[0], exp[0]);
        end
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
