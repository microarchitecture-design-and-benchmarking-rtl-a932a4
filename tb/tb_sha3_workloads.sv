// tb_sha3_workloads: SHA3-224/256/384/512 message sweeps through
// shatr_ext_top at its default parameters, run as software would run them.
//
// The shatr extension is benchmarked on the four SHA-3 output sizes with
// short and long test messages. This testbench uses the same shapes:
//   short  every message length from 0 to the rate in bytes (the byte
//          lengths of the standard short-message test set), random content;
//   long   four messages per size of 8, 13, 21 and 34 blocks plus an odd
//          tail, random content;
//   table  per size and per short/long set, as many shatr rounds as the
//          benchmark table of the extension's evaluation reports for its
//          test data set (e.g. 810,480 rounds for SHA3-256 long): one-block
//          messages of cycling lengths for the short sets, messages of
//          8..64 blocks for the long sets, sized so the round count is
//          reached exactly.
// Each digest is checked against keccak_ref_pkg::sha3; random stalls are
// on throughout. At the end it prints, per size, the messages, the
// permutations and the shatr rounds executed, and how many cycles the
// extension needed per round (one).
module tb_sha3_workloads;
  import keccak_pkg::*;
  import keccak_ref_pkg::*;

  `include "shatr_host_model.svh"

  initial begin
    byte unsigned m[$];
    int dl [4];
    int rate, shatr0, msgs;
    int longblk [4];
    dl = '{28, 32, 48, 64};
    longblk = '{8, 13, 21, 34};
    rst_n = 0;
    id_op = bubble(); ex_op = bubble(); mem_op = bubble();
    model = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    stall_en = 1;
    for (int v = 0; v < 4; v++) begin
      rate = 200 - 2*dl[v];
      // short messages
      shatr0 = n_shatr; msgs = 0;
      for (int len = 0; len <= rate; len++) begin
        m.delete();
        for (int i = 0; i < len; i++) m.push_back(8'($urandom));
        run_case(m, dl[v], "short", '0, 0);
        msgs++;
      end
      $display("SHA3-%0d short: %0d messages, %0d permutations, %0d shatr rounds",
               8*dl[v], msgs, (n_shatr - shatr0) / 24, n_shatr - shatr0);
      chk((n_shatr - shatr0) % 24 == 0, "short set: whole permutations");
      // long messages
      shatr0 = n_shatr; msgs = 0;
      for (int k = 0; k < 4; k++) begin
        int len;
        len = longblk[k] * rate + 8*k + 3;
        m.delete();
        for (int i = 0; i < len; i++) m.push_back(8'($urandom));
        run_case(m, dl[v], "long", '0, 0);
        msgs++;
      end
      $display("SHA3-%0d long: %0d messages, %0d permutations, %0d shatr rounds",
               8*dl[v], msgs, (n_shatr - shatr0) / 24, n_shatr - shatr0);
      chk((n_shatr - shatr0) % 24 == 0, "long set: whole permutations");
    end
    // round totals of the evaluation data sets, short then long
    for (int v = 0; v < 4; v++) begin
      int target [2];
      int perms, blocks, len;
      rate = 200 - 2*dl[v];
      target = (v == 0) ? '{15768, 724056} : (v == 1) ? '{14904, 810480}
             : (v == 2) ? '{11448, 343584} : '{7992, 258480};
      for (int set = 0; set < 2; set++) begin
        shatr0 = n_shatr; msgs = 0; perms = 0;
        while (perms < target[set] / 24) begin
          if (set == 0) begin
            blocks = 1;
            len = msgs % rate;                 // 0 .. rate-1 bytes: one block
          end else begin
            blocks = $urandom_range(8, 64);
            if (blocks > target[set] / 24 - perms) blocks = target[set] / 24 - perms;
            len = blocks * rate - 1;           // exactly 'blocks' blocks
          end
          m.delete();
          for (int i = 0; i < len; i++) m.push_back(8'($urandom));
          run_case(m, dl[v], set == 0 ? "table short" : "table long", '0, 0);
          perms += blocks;
          msgs++;
        end
        $display("SHA3-%0d %s data set: %0d messages, %0d shatr rounds (target %0d)",
                 8*dl[v], set == 0 ? "short" : "long", msgs, n_shatr - shatr0, target[set]);
        chk(n_shatr - shatr0 == target[set], "round total of the data set");
      end
    end
    stall_en = 0;
    chk(n_stall > 0 && n_bypass > 0, "stall and bypass exercised");
    $display("mechanisms: shatr=%0d bypass=%0d stall=%0d ld=%0d sd=%0d",
             n_shatr, n_bypass, n_stall, n_ld, n_sd);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
