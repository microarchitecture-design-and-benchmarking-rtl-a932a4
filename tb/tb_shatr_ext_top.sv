// tb_shatr_ext_top: end-to-end testbench for shatr_ext_top at its default
// parameters.
//
// The testbench plays the host core. It keeps a copy of the host's ID, EX
// and MEM stages as a small op pipeline and drives the extension's ports
// from it: the instruction word and rs1 value in ID, the stall and flush
// controls, and 64-bit loads and stores in MEM. A "software" thread then
// hashes messages exactly as a program using shatr would:
//   clear the state with 25 stores; per rate-sized block, load each rate
//   lane, XOR the message word and store it back, then issue 24 shatr with
//   round indices 0..23; finally load the digest lanes.
// Messages are SHA3-224/256/384/512 of "", "abc" and random short and
// multi-block inputs. Digests are compared with keccak_ref_pkg::sha3 and,
// for "abc", with the published FIPS 202 digests.
//
// Alongside, a state model predicts every load and every shatr. The run
// forces each mechanism at least once and counts it: shatr execution,
// the store-to-shatr bypass, a stall holding a shatr in EX, a flush killing
// wrong-path shatr, lane loads and stores, accesses outside the lane
// window, and non-shatr words in decode. A permutation issued without
// stalls must take exactly 24 consecutive cycles of shatr execution.
module tb_shatr_ext_top;
  import keccak_pkg::*;
  import keccak_ref_pkg::*;

  `include "shatr_host_model.svh"

  localparam logic [511:0] ABC224 = 512'he642824c3f8cf24ad09234ee7d3c766fc9a3a5168d0c94ad73b46fdf;
  localparam logic [511:0] ABC256 = 512'h3a985da74fe225b2045c172d6bd390bd855f086e3e9d525b46bfe24511431532;
  localparam logic [511:0] ABC384 = 512'hec01498288516fc926459f58e2c6ad8df9b473cb0fc08c2596da7cf0e49be4b298d88cea927ac7f539f1edf228376d25;
  localparam logic [511:0] ABC512 = 512'hb751850b1a57168a5693cd924b6b096e08f621827444f70d884f5d0240d2712e10e116e9192af3c91a7ec57647e3934057340b4cf408d5a56592f8274eec53f0;
  localparam logic [511:0] EMPTY256 = 512'ha7ffc6f8bf1ed76651c14756a061d662f580ff4de43b49fa82d80a4b80f8434a;

  initial begin
    byte unsigned abc[$], empty[$], m[$];
    int dl [4];
    abc = '{8'h61, 8'h62, 8'h63};
    dl  = '{28, 32, 48, 64};
    rst_n = 0;
    id_op = bubble(); ex_op = bubble(); mem_op = bubble();
    model = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;

    // known-answer digests, no stalls: also checks 24-cycle permutations
    run_case(abc, 28, "abc", ABC224, 1);
    run_case(abc, 32, "abc", ABC256, 1);
    run_case(abc, 48, "abc", ABC384, 1);
    run_case(abc, 64, "abc", ABC512, 1);
    run_case(empty, 32, "empty", EMPTY256, 1);
    chk(n_perm24 >= 5, "24 back-to-back shatr cycles per permutation");

    // wrong-path shatr pairs, flushed in EX, must leave the state alone
    for (int k = 0; k < 3; k++) begin
      prog.push_back(mk(K_SHATR, 0, '0, 3, 1));
      prog.push_back(mk(K_SHATR, 0, '0, 4, 1));
      prog.push_back(mk(K_LDX, k));
      prog.push_back(mk(K_SDX, k, 64'hdead));
    end
    drain();

    // random messages of every variant, short and multi-block, with stalls
    stall_en = 1;
    flush_en = 1;
    for (int v = 0; v < 4; v++) begin
      for (int t = 0; t < 3; t++) begin
        int len;
        len = (t == 0) ? $urandom_range(0, 20)
            : (t == 1) ? $urandom_range(100, 200) : $urandom_range(300, 500);
        m.delete();
        for (int i = 0; i < len; i++) m.push_back(8'($urandom));
        run_case(m, dl[v], "random", '0, 0);
      end
    end
    stall_en = 0;
    flush_en = 0;

    chk(n_shatr  > 0, "shatr never executed");
    chk(n_bypass > 0, "bypass never happened");
    chk(n_stall  > 0, "stall never held a shatr");
    chk(n_flush  > 0, "flush never killed a shatr");
    chk(n_ld > 0 && n_sd > 0, "lane loads/stores never happened");
    chk(n_miss   > 0, "no access outside the window");
    chk(n_alu    > 0, "no non-shatr instruction decoded");
    $display("mechanisms: shatr=%0d bypass=%0d stall=%0d flush=%0d ld=%0d sd=%0d miss=%0d alu=%0d perm24=%0d",
             n_shatr, n_bypass, n_stall, n_flush, n_ld, n_sd, n_miss, n_alu, n_perm24);
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
