// tb_sha256_core: checks the SHA-256 core on the FIPS 180-4 examples "abc"
// (one block) and the 448-bit "abcdbcde...nopq" message (two blocks), padded
// here by hand, and checks the 66-cycle latency per block.
//
// The vectors are the standard's own; nothing here is specific to the paper.
module tb_sha256_core;
  logic clk = 0, rst_n = 0, init = 0, next = 0;
  logic [511:0] block;
  logic ready, done;
  logic [255:0] digest;
  int checks = 0, failures = 0;

  sha256_core dut (.*);
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

  task automatic feed(input logic [511:0] blk, input bit first);
    int cyc;
    @(negedge clk);
    block = blk; init = first; next = !first;
    @(negedge clk);
    init = 0; next = 0; block = '0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    chk(cyc == 66, $sformatf("latency %0d, expected 66", cyc));
    chk(ready, "ready after done");
  endtask

  initial begin
    logic [511:0] m;
    block = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // "abc": 616263 80 00.. length 24
    m = '0; m[511:480] = 32'h61626380; m[63:0] = 64'd24;
    feed(m, 1);
    chk(digest == 256'hba7816bf8f01cfea414140de5dae2223b00361a396177a9cb410ff61f20015ad,
        $sformatf("abc digest %h", digest));
    // "abcdbcdecdefdefgefghfghighijhijkijkljklmklmnlmnomnopnopq" (56 bytes)
    m = {"abcdbcdecdefdefgefghfghighijhijkijkljklmklmnlmnomnopnopq", 8'h80, 56'h0};
    feed(m, 1);
    m = '0; m[63:0] = 64'd448;
    feed(m, 0);
    chk(digest == 256'h248d6a61d20638b8e5c026930c3e6039a33ce45964ff2167f6ecedd419db06c1,
        $sformatf("2-block digest %h", digest));
    // a new message after a chained one starts from the initial value again
    m = '0; m[511:480] = 32'h61626380; m[63:0] = 64'd24;
    feed(m, 1);
    chk(digest == 256'hba7816bf8f01cfea414140de5dae2223b00361a396177a9cb410ff61f20015ad,
        "abc digest after chaining");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
