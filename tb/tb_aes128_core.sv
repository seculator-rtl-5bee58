// tb_aes128_core: checks the AES-128 core against published FIPS-197 and
// SP 800-38A vectors, and checks the latency of 11 cycles from start to done.
//
// The vectors are the standard's own; nothing here is specific to the paper.
module tb_aes128_core;
  logic clk = 0, rst_n = 0, start = 0;
  logic [127:0] key, din, dout;
  logic busy, done;
  int checks = 0, failures = 0;

  aes128_core dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic vec(input logic [127:0] k, input logic [127:0] p, input logic [127:0] c);
    int cyc = 0;
    @(negedge clk);
    key = k; din = p; start = 1;
    @(negedge clk);
    start = 0;
    key = '0; din = '0;   // inputs need only be valid with start
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    checks++;
    if (dout !== c) begin failures++; $display("FAIL: got %h exp %h", dout, c); end
    checks++;
    if (cyc != 11) begin failures++; $display("FAIL: latency %0d, expected 11", cyc); end
  endtask

  initial begin
    key = '0; din = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // FIPS-197 appendix C.1
    vec(128'h000102030405060708090a0b0c0d0e0f, 128'h00112233445566778899aabbccddeeff,
        128'h69c4e0d86a7b0430d8cdb78070b4c55a);
    // FIPS-197 appendix B
    vec(128'h2b7e151628aed2a6abf7158809cf4f3c, 128'h3243f6a8885a308d313198a2e0370734,
        128'h3925841d02dc09fbdc118597196a0b32);
    // SP 800-38A F.1.1 ECB-AES128 blocks 1 and 2
    vec(128'h2b7e151628aed2a6abf7158809cf4f3c, 128'h6bc1bee22e409f96e93d7e117393172a,
        128'h3ad77bb40d7a3660a89ecaf32466ef97);
    vec(128'h2b7e151628aed2a6abf7158809cf4f3c, 128'hae2d8a571e03ac9c9eb76fac45af8e51,
        128'hf5d3d58503b9699de785895a96fdbaaf);
    // all-zero key and block
    vec(128'h0, 128'h0, 128'h66e94bd4ef8a2c3b884cfa59ca342b2e);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
