// tb_mac_verifier: runs layer sequences through the MAC verifier with random
// block MACs. Layer A writes partial sums, reads them back and writes final
// ofmaps; layer B reads those once or several times as ifmaps. Checks that an
// honest sequence passes, and that a tampered block, a replayed old version, a
// missing first read and an uneven read count are each caught, that host data
// (ACC_NONE) is ignored, and that the register pairs alternate over three layers.
//
// The register equations and the even/odd rule follow the paper; the timing of
// the check and the enable bit are this design's own choices.
module tb_mac_verifier;
  import seculator_pkg::*;
  logic clk = 0, rst_n = 0;
  logic layer_start = 0, check_prev = 0, acc_valid = 0, acc_first = 0, layer_end = 0;
  mac_t mac_b = '0;
  acc_kind_e acc_kind = ACC_W;
  logic chk_done, fr_ok, ir_ok, breach;
  int checks = 0, failures = 0;

  mac_verifier dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit c, input string s);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", s); end
  endtask

  function automatic mac_t rmac();
    mac_t m;
    for (int i = 0; i < 8; i++) m[32*i +: 32] = $urandom;
    return m;
  endfunction

  task automatic acc(input acc_kind_e k, input mac_t m, input bit first = 0);
    @(negedge clk);
    acc_valid = 1; acc_kind = k; mac_b = m; acc_first = first;
    @(negedge clk);
    acc_valid = 0; acc_first = 0;
  endtask

  task automatic start_layer(input bit cp);
    @(negedge clk);
    layer_start = 1; check_prev = cp;
    @(negedge clk);
    layer_start = 0;
  endtask

  task automatic end_layer(input bit exp_fr, input bit exp_ir, input string s);
    @(negedge clk);
    layer_end = 1;
    @(negedge clk);
    layer_end = 0;
    chk(chk_done, {s, ": chk_done"});
    chk(fr_ok == exp_fr, $sformatf("%s: fr_ok=%0b exp %0b", s, fr_ok, exp_fr));
    chk(ir_ok == exp_ir, $sformatf("%s: ir_ok=%0b exp %0b", s, ir_ok, exp_ir));
  endtask

  // one producer layer: NT tiles, NP passes; final version stays unread
  task automatic producer(input int nt, input int np, output mac_t fin[$]);
    mac_t cur[$];
    for (int t = 0; t < nt; t++) begin cur.push_back(rmac()); acc(ACC_W, cur[t]); end
    for (int p = 1; p < np; p++)
      for (int t = 0; t < nt; t++) begin
        acc(ACC_R, cur[t]);
        cur[t] = rmac();
        acc(ACC_W, cur[t]);
      end
    fin = cur;
  endtask

  initial begin
    mac_t fin[$], fin2[$], wts[$], old;
    repeat (2) @(negedge clk);
    rst_n = 1;

    // layer 0: first layer, nothing to check
    start_layer(0);
    producer(4, 3, fin);
    end_layer(1, 1, "layer0");
    chk(!breach, "no breach after layer 0");

    // layer 1: reads layer 0's outputs twice (first + second pass), weights
    wts.delete();
    for (int i = 0; i < 3; i++) wts.push_back(rmac());
    start_layer(1);
    for (int t = 0; t < 4; t++) acc(ACC_IN, fin[t], 1);
    foreach (wts[i]) acc(ACC_NONE, wts[i]);
    producer(5, 2, fin2);               // interleaved: own ofmaps
    for (int t = 0; t < 4; t++) acc(ACC_IN, fin[t], 0);
    foreach (wts[i]) acc(ACC_NONE, wts[i]);
    end_layer(1, 1, "layer1 honest");
    chk(!breach, "no breach after honest layer 1");

    // layer 2: reads layer 1's outputs once; one block tampered
    start_layer(1);
    for (int t = 0; t < 5; t++) acc(ACC_IN, (t == 2) ? (fin2[t] ^ mac_t'(1)) : fin2[t], 1);
    producer(2, 1, fin);
    end_layer(0, 1, "layer2 tampered");
    chk(breach, "breach after tampering");

    // new run after reset: replay of an old version and a missing first read
    rst_n = 0; @(negedge clk); rst_n = 1;
    chk(!breach, "reset clears breach");
    start_layer(0);
    producer(3, 2, fin);
    end_layer(1, 1, "run2 layer0");
    start_layer(1);
    // the first-pass value of tile 0 is not known here; a random MAC models
    // the replay of a stale version in place of the final one
    old = rmac();
    acc(ACC_IN, old, 1);
    acc(ACC_IN, fin[1], 1);
    acc(ACC_IN, fin[2], 1);
    end_layer(0, 1, "run2 replay");
    chk(breach, "breach after replay");

    rst_n = 0; @(negedge clk); rst_n = 1;
    start_layer(0);
    producer(3, 1, fin);
    end_layer(1, 1, "run3 layer0");
    start_layer(1);
    acc(ACC_IN, fin[0], 1);
    acc(ACC_IN, fin[1], 1);              // tile 2 never read
    end_layer(0, 1, "run3 missing read");

    rst_n = 0; @(negedge clk); rst_n = 1;
    start_layer(0);
    producer(3, 1, fin);
    end_layer(1, 1, "run4 layer0");
    start_layer(1);
    foreach (fin[t]) acc(ACC_IN, fin[t], 1);
    acc(ACC_IN, fin[0], 0);              // tile 0 read twice, others once
    end_layer(1, 0, "run4 uneven reads");
    chk(breach, "breach after uneven reads");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
