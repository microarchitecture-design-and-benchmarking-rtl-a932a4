// tb_keccak_eu: self-checking testbench for keccak_eu.
//
// Each cycle randomly issues a shatr (round 0..23), a lane store and a
// lane load, in any combination, as an in-order pipeline would present
// them (the store and load belong to an older instruction than the shatr).
// A model built on keccak_ref_pkg predicts the load data (the state before
// this cycle's round) and the next state (the round applied to the state
// with the store merged in). This checks the one-cycle round latency, the
// store-to-round bypass and its status output. It ends with 24 back-to-back
// shatr on the zero state and compares with the reference permutation.
module tb_keccak_eu;
  import keccak_pkg::*;
  import keccak_ref_pkg::*;

  int checks = 0, failures = 0;
  int n_bypass = 0, n_shatr = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  logic   rst_n, shatr, lane_we, bypass;
  round_t rnd;
  lidx_t  widx, ridx;
  lane_t  wdata, rdata;
  flat_t  model;

  keccak_eu dut (
    .clk(clk), .rst_n(rst_n), .shatr_i(shatr), .round_i(rnd),
    .lane_we_i(lane_we), .lane_widx_i(widx), .lane_wdata_i(wdata),
    .lane_ridx_i(ridx), .lane_rdata_o(rdata), .bypass_o(bypass)
  );

  task automatic chk(logic ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 6) $display("%0t %s", $time, what);
    end
  endtask

  task automatic step();
    flat_t nxt;
    logic exp_byp;
    #3;
    chk(rdata === ((ridx < 25) ? model[ridx] : '0), "load data");
    exp_byp = shatr && lane_we && widx < 25;
    chk(bypass === exp_byp, "bypass flag");
    nxt = model;
    if (lane_we && widx < 25) nxt[widx] = wdata;
    if (shatr) nxt = ref_round(nxt, int'(rnd));
    n_bypass += int'(exp_byp);
    n_shatr  += int'(shatr);
    @(posedge clk);
    model = nxt;
    @(negedge clk);
  endtask

  initial begin
    rst_n = 0; shatr = 0; lane_we = 0; rnd = '0; widx = '0; ridx = '0; wdata = '0;
    model = '0;
    #12 rst_n = 1;
    @(negedge clk);
    for (int k = 0; k < 1500; k++) begin
      shatr   = ($urandom_range(0, 2) == 0);
      rnd     = round_t'($urandom_range(0, 23));
      lane_we = ($urandom_range(0, 1) == 0);
      widx    = lidx_t'($urandom_range(0, 26));
      wdata   = {$urandom(), $urandom()};
      ridx    = lidx_t'($urandom_range(0, 26));
      step();
    end
    // clear the state by stores, then one full permutation
    shatr = 0;
    for (int i = 0; i < 25; i++) begin
      lane_we = 1; widx = lidx_t'(i); wdata = '0; ridx = '0;
      step();
    end
    lane_we = 0;
    for (int r = 0; r < 24; r++) begin
      shatr = 1; rnd = round_t'(r);
      step();
    end
    shatr = 0;
    for (int i = 0; i < 25; i++) begin
      ridx = lidx_t'(i);
      #3 chk(rdata === ref_permute('0)[i], "permutation lane");
      @(negedge clk);
    end
    chk(n_bypass > 0, "bypass never exercised");
    $display("shatr=%0d bypass=%0d", n_shatr, n_bypass);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
