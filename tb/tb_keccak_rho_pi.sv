// tb_keccak_rho_pi: self-checking testbench for keccak_rho_pi.
//
// Drives a_i with random 1600-bit states (plus all-zero and all-one
// corner cases) and compares b_o with the independent model in
// keccak_ref_pkg. A free-running clock paces the checks and a watchdog
// ends the run if it hangs.
module tb_keccak_rho_pi;
  import keccak_pkg::*;
  import keccak_ref_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  state_t din, dout;

  keccak_rho_pi dut (.a_i(din), .b_o(dout));

  task automatic check_one(flat_t v);
    flat_t exp;
    din = v;
    @(posedge clk);
    exp = ref_rho_pi(v);
    checks++;
    if (dout !== exp) begin
      failures++;
      if (failures < 5) $display("mismatch: in=%h\n got=%h\n exp=%h", v, dout, exp);
    end
  endtask

  initial begin
    check_one('0);
    check_one('1);
    for (int i = 0; i < 25; i++) begin   // one set bit per lane
      flat_t v;
      v = '0;
      v[i][(7*i) % 64] = 1'b1;
      check_one(v);
    end
    repeat (300) check_one(rand_state());
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
