// tb_keccak_state_regs: self-checking testbench for keccak_state_regs.
//
// Applies random mixes of full loads, single-lane writes (including lane
// indices 25..31, which must be ignored) and both at once, and compares the
// whole 1600-bit register after every edge with a model in the testbench.
// Also checks that reset clears all 200 bytes.
module tb_keccak_state_regs;
  import keccak_pkg::*;
  import keccak_ref_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  logic   rst_n, full_we, lane_we;
  state_t full_d, q;
  lidx_t  idx;
  lane_t  lane_d;
  flat_t  model;

  keccak_state_regs dut (
    .clk(clk), .rst_n(rst_n), .full_we_i(full_we), .full_d_i(full_d),
    .lane_we_i(lane_we), .lane_idx_i(idx), .lane_d_i(lane_d), .state_o(q)
  );

  task automatic compare(string what);
    checks++;
    if (q !== model) begin
      failures++;
      if (failures < 5) $display("%s: state differs from model", what);
    end
  endtask

  initial begin
    rst_n = 0; full_we = 0; lane_we = 0; full_d = '0; idx = '0; lane_d = '0;
    model = '0;
    #12 rst_n = 1;
    compare("after reset");
    for (int k = 0; k < 2000; k++) begin
      @(negedge clk);
      full_we = ($urandom_range(0, 3) == 0);
      lane_we = ($urandom_range(0, 1) == 0);
      full_d  = rand_state();
      idx     = lidx_t'($urandom_range(0, 31));
      lane_d  = {$urandom(), $urandom()};
      @(posedge clk);
      if (full_we)                 model = full_d;
      else if (lane_we && idx < 25) model[idx] = lane_d;
      #1 compare("after write");
    end
    @(negedge clk);
    full_we = 0; lane_we = 0;
    rst_n = 0;
    #1 model = '0;
    compare("after second reset");
    rst_n = 1;
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
