// tb_security_module: drives the security module through three layers and
// compares every block with the reference AES-CTR pad and SHA-256 MAC.
// Layer 1 stores two ofmap tiles twice (VNs 1 1 2 2), reading the partial sums
// back in between; layer 2 reads the final tiles as ifmaps (VN 2, layer 1's id,
// first reads) and host-encrypted weights (VN 1, session key) and must pass its
// check; layer 3 reads a
// tampered ifmap block and must raise `breach`. Also checks the block latency.
//
// Per-block AES-CTR, MACs and VN generation follow the paper; the session-key
// handling of host data and the latencies are this design's own choices.
module tb_security_module;
  import seculator_pkg::*;
  import crypto_ref_pkg::*;
  localparam logic [63:0] SID = 64'h0123_4567_89ab_cdef;
  localparam logic [127:0] SKEY = 128'h000102030405060708090a0b0c0d0e0f;
  logic clk = 0, rst_n = 0;
  logic layer_start = 0, layer_end = 0, req_valid = 0;
  layer_cfg_t cfg;
  sec_req_t req;
  logic req_ready, resp_valid, chk_done, breach;
  block_t resp_data;
  int checks = 0, failures = 0;

  security_module #(.SECRET_ID(SID)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit c, input string s);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", s); end
  endtask

  function automatic block_t rblk();
    block_t b;
    for (int i = 0; i < 16; i++) b[32*i +: 32] = $urandom;
    return b;
  endfunction

  task automatic send(input bit store, input tclass_e cls, input logic [15:0] fid,
                      input logic [31:0] idx, input block_t d, output block_t q, output int cyc);
    @(negedge clk);
    req = '0;
    req.store = store; req.cls = cls; req.tile_last = 1'b1;
    req.fmap_id = fid; req.blk_idx = idx; req.data = d;
    req_valid = 1;
    while (!req_ready) @(negedge clk);
    @(negedge clk);
    req_valid = 0;
    cyc = 1;
    while (!resp_valid) begin @(negedge clk); cyc++; end
    q = resp_data;
  endtask

  task automatic begin_layer(input logic [15:0] lid, input logic [15:0] plid, input logic [31:0] invn,
                             input triplet_t w, input triplet_t r, input triplet_t i,
                             input bit cp);
    @(negedge clk);
    cfg = '0;
    cfg.random = 64'hfeed_beef_0000_1234;
    cfg.layer_id = lid; cfg.prev_layer_id = plid; cfg.in_vn = invn;
    cfg.wr_trip = w; cfg.rd_trip = r; cfg.in_trip = i;
    cfg.check_prev = cp; cfg.session_key = SKEY;
    layer_start = 1;
    @(negedge clk);
    layer_start = 0;
  endtask

  task automatic finish_layer(input bit exp_breach, input string s);
    @(negedge clk);
    layer_end = 1;
    @(negedge clk);
    layer_end = 0;
    @(negedge clk);
    chk(breach == exp_breach, $sformatf("%s: breach=%0b exp %0b", s, breach, exp_breach));
  endtask

  initial begin
    block_t p[2], c[2], q, wt, wct;
    logic [63:0] rnd;
    int cyc;
    req = '0; cfg = '0;
    rnd = 64'hfeed_beef_0000_1234;
    repeat (2) @(negedge clk);
    rst_n = 1;

    // ---- layer 1: write pattern (1^2 2^2)^1, read pattern (1^2)^1
    begin_layer(16'd1, 16'd0, 32'd0, '{16'd2, 16'd2, 16'd1}, '{16'd2, 16'd1, 16'd1},
                '{16'd0, 16'd0, 16'd0}, 0);
    for (int t = 0; t < 2; t++) begin
      p[t] = rblk();
      send(1, CLS_OFMAP, 16'(10 + t), 32'(t), p[t], c[t], cyc);
      chk(c[t] == (p[t] ^ block_pad(SID, rnd, 16'd1, 16'(10 + t), 32'd1, 32'(t))),
          $sformatf("layer1 store VN1 tile %0d", t));
      chk(cyc == 147, $sformatf("block latency %0d, expected 147", cyc));
    end
    for (int t = 0; t < 2; t++) begin
      send(0, CLS_OFMAP, 16'(10 + t), 32'(t), c[t], q, cyc);
      chk(q == p[t], $sformatf("layer1 partial read tile %0d decrypts", t));
      p[t] = p[t] + 1;
      send(1, CLS_OFMAP, 16'(10 + t), 32'(t), p[t], c[t], cyc);
      chk(c[t] == (p[t] ^ block_pad(SID, rnd, 16'd1, 16'(10 + t), 32'd2, 32'(t))),
          $sformatf("layer1 store VN2 tile %0d", t));
    end
    finish_layer(0, "layer1");

    // ---- layer 2: reads layer 1's final tiles (VN 2) once, and one weight block
    wt  = rblk();
    wct = wt ^ block_pad(SKEY[127:64], SKEY[63:0], 16'd2, 16'd99, 32'd1, 32'd0);
    begin_layer(16'd2, 16'd1, 32'd2, '{16'd1, 16'd1, 16'd1}, '{16'd0, 16'd0, 16'd0},
                '{16'd2, 16'd1, 16'd1}, 1);
    for (int t = 0; t < 2; t++) begin
      send(0, CLS_IFMAP, 16'(10 + t), 32'(t), c[t], q, cyc);
      chk(q == p[t], $sformatf("layer2 ifmap tile %0d decrypts", t));
    end
    send(0, CLS_WEIGHT, 16'd99, 32'd0, wct, q, cyc);
    chk(q == wt, "weight decrypts with the session key");
    chk(cyc == 13, $sformatf("latency without MAC %0d, expected 13", cyc));
    p[0] = rblk();
    send(1, CLS_OFMAP, 16'd20, 32'd0, p[0], c[0], cyc);
    chk(c[0] == (p[0] ^ block_pad(SID, rnd, 16'd2, 16'd20, 32'd1, 32'd0)), "layer2 store");
    finish_layer(0, "layer2 honest");

    // ---- layer 3: ifmap block tampered in memory
    begin_layer(16'd3, 16'd2, 32'd1, '{16'd0, 16'd0, 16'd0}, '{16'd0, 16'd0, 16'd0},
                '{16'd1, 16'd1, 16'd1}, 1);
    send(0, CLS_IFMAP, 16'd20, 32'd0, c[0] ^ block_t'(1), q, cyc);
    chk(q != p[0], "tampered block decrypts to other data");
    finish_layer(1, "layer3 tampered");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
