// tb_aes_ctr_unit: checks one counter-mode block against pads computed from
// the FIPS-197 vector, that encrypting twice restores the plaintext, that a
// different VN or block index changes the ciphertext, and the 11-cycle latency.
//
// The four engines and the CTR mode follow the paper; the counter layout checked
// is this design's own choice.
module tb_aes_ctr_unit;
  import seculator_pkg::*;
  logic clk = 0, rst_n = 0, start = 0;
  logic [63:0] secret_id, random;
  logic [127:0] key;
  assign key = {secret_id, random};
  logic [15:0] layer_id, fmap_id;
  logic [31:0] vn, blk_idx;
  block_t din, dout;
  logic done;
  int checks = 0, failures = 0;

  aes_ctr_unit dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit c, input string s);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", s); end
  endtask

  task automatic run(input block_t d, output block_t q, output int cyc);
    @(negedge clk);
    din = d; start = 1;
    @(negedge clk);
    start = 0; din = '0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    q = dout;
  endtask

  initial begin
    block_t p, c1, c2, c3, c4;
    int cyc;
    // With key 0 and every counter field 0, engine 0 encrypts the all-zero
    // block; its pad is the published AES-128 value 66e94bd4...ca342b2e.
    secret_id = '0; random = '0; layer_id = '0; fmap_id = '0; vn = '0; blk_idx = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    run('0, c1, cyc);
    chk(c1[511:384] == 128'h66e94bd4ef8a2c3b884cfa59ca342b2e, $sformatf("pad0 %h", c1[511:384]));
    chk(cyc == 11, $sformatf("latency %0d", cyc));
    // the four pads differ
    chk(c1[511:384] != c1[383:256] && c1[383:256] != c1[255:128] && c1[255:128] != c1[127:0],
        "pads of the four engines differ");
    // key 2b7e..3c, counter engine 0 with fields all zero except fmap/layer chosen
    secret_id = 64'h2b7e151628aed2a6; random = 64'habf7158809cf4f3c;
    layer_id = 16'h3; fmap_id = 16'h7; vn = 32'd5; blk_idx = 32'd42;
    for (int i = 0; i < 16; i++) p[32*i +: 32] = $urandom;
    run(p, c1, cyc);
    chk(c1 != p, "ciphertext differs from plaintext");
    run(c1, c2, cyc);
    chk(c2 == p, "decrypting restores plaintext");
    vn = 32'd6;
    run(p, c3, cyc);
    chk(c3 != c1, "new VN gives new ciphertext");
    vn = 32'd5; blk_idx = 32'd43;
    run(p, c4, cyc);
    chk(c4 != c1 && c4 != c3, "new block index gives new ciphertext");
    // pad is independent of data: c1 ^ p equals pad for another plaintext
    blk_idx = 32'd42;
    run('0, c2, cyc);
    chk(c2 == (c1 ^ p), "pad is XORed onto the data");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
