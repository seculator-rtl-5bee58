// tb_mac_generator: compares the block MAC with SHA-256 of the same 84-byte
// message computed by the reference model, for random fields and data, and
// checks the latency (133 cycles from start to done).
//
// The MAC formula follows the paper; field widths are this design's own choice.
module tb_mac_generator;
  import seculator_pkg::*;
  import crypto_ref_pkg::*;
  logic clk = 0, rst_n = 0, start = 0;
  logic [63:0] secret_id;
  logic [15:0] layer_id, fmap_id;
  logic [31:0] vn, blk_idx;
  block_t data;
  logic ready, done;
  mac_t mac;
  int checks = 0, failures = 0;

  mac_generator dut (.*);
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

  initial begin
    int cyc;
    logic [255:0] exp;
    secret_id = '0; layer_id = '0; fmap_id = '0; vn = '0; blk_idx = '0; data = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // the known "abc" vector checks the reference itself
    begin
      bytes_t m = new[3];
      m[0] = 8'h61; m[1] = 8'h62; m[2] = 8'h63;
      chk(sha256(m) == 256'hba7816bf8f01cfea414140de5dae2223b00361a396177a9cb410ff61f20015ad,
          "reference SHA-256");
    end
    for (int n = 0; n < 6; n++) begin
      secret_id = {$urandom, $urandom}; layer_id = 16'($urandom); fmap_id = 16'($urandom);
      vn = $urandom; blk_idx = $urandom;
      for (int i = 0; i < 16; i++) data[32*i +: 32] = $urandom;
      exp = block_mac(secret_id, layer_id, fmap_id, vn, blk_idx, data);
      @(negedge clk);
      chk(ready, "ready before start");
      start = 1;
      @(negedge clk);
      start = 0; data = '0; vn = '0;
      cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      chk(mac == exp, $sformatf("mac %h exp %h", mac, exp));
      chk(cyc == 133, $sformatf("latency %0d, expected 133", cyc));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
