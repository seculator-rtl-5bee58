// tb_seculator_top: end-to-end test of the NPU at its default size (32x32 PE
// array, 240 KB buffer), with the memory model (100-clock latency, 10% of
// requests refused) and the testbench acting as host.
//
// Network: three layers lowered to matrix products over 32 pixels.
//   layer 1: Y1 = X * W1, 32 input channels in two channel tiles of 16; the
//            32 output channels form two ofmap tiles. Input reuse: after the
//            first channel tile the partial sums go to memory (VN 1), are read
//            back for the second channel tile and written again (VN 2).
//            Write triplet <2,2,1>, read triplet <2,1,1>. X and W1 come from the
//            host, encrypted with the session key.
//   layer 2: Y2 = Y1 * W2, reading Y1's two tiles once each (first reads, VN 2,
//            layer id 1), then writing Y2 (VN 1). Its end checks layer 1.
//   layer 3: reads Y2's tiles twice (input triplet <2,2,1>) and checks layer 2.
// Run 1 is honest: Y1 and Y2 in memory must decrypt to the reference products,
// and every layer must pass. Run 2 flips one bit of Y1 in memory before layer 2
// (tampering), run 3 puts back Y1's stale VN-1 ciphertext (replay): both must be
// reported by layer 2's check. Each mechanism is counted and must occur.
//
// The version-number scheme, encryption and layer-level MAC check follow the
// paper; the instruction set, tiling and test network are this design's own.
module tb_seculator_top;
  import seculator_pkg::*;
  import crypto_ref_pkg::*;

  localparam logic [63:0]  SID  = 64'h5ec0_1a70_c0de_0001;   // the NPU's default id
  localparam logic [63:0]  RND  = 64'h0bad_cafe_1234_5678;
  localparam logic [127:0] SKEY = 128'h2b7e151628aed2a6abf7158809cf4f3c;
  localparam int N = 32;            // pixels = array rows = array columns
  localparam int CT = 16;           // channels per tile

  // memory map (block addresses) and buffer map (lines)
  localparam int M_X = 0, M_W1 = 64, M_Y1 = 128, M_W2 = 192, M_Y2 = 256;
  localparam int G_A = 0, G_B = 64, G_C = 128;

  logic clk = 0, rst_n = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic instr_valid = 0, instr_ready, layer_done, layer_ok, breach;
  instr_t instr;
  logic mem_req_valid, mem_req_ready, mem_we, mem_rvalid;
  logic [MADDR_W-1:0] mem_addr;
  block_t mem_wdata, mem_rdata;

  seculator_top dut (.*);
  mem_model #(.DEPTH(512), .LAT(100), .BUSY_PCT(10)) u_mem (.*);

  initial begin
    repeat (3_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit c, input string s);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", s); end
  endtask

  // ---------------- mechanism counters (observed inside the NPU)
  int n_psum_reload = 0, n_vn2_store = 0, n_first = 0, n_reread = 0, n_session = 0;
  int n_mem_stall = 0, n_accum = 0, n_ok_check = 0, n_breach = 0;
  always @(posedge clk) if (rst_n) begin
    if (dut.u_sec.accept) begin
      if (!dut.u_sec.req.store && dut.u_sec.req.cls == CLS_OFMAP) n_psum_reload++;
      if (dut.u_sec.req.store && dut.u_sec.wr_vn == 2) n_vn2_store++;
      if (!dut.u_sec.req.store && dut.u_sec.req.cls == CLS_IFMAP && !dut.u_sec.cfg_q.ext_in) begin
        if (dut.u_sec.in_first) n_first++; else n_reread++;
      end
      if (dut.u_sec.key_sel == SKEY) n_session++;
    end
    if (mem_req_valid && !mem_req_ready) n_mem_stall++;
    if (dut.ce_start && instr.ce.accumulate) n_accum++;
    if (layer_done && layer_ok && dut.u_sec.cfg_q.check_prev) n_ok_check++;
    if (layer_done && !layer_ok) n_breach++;
  end

  // ---------------- host side
  logic [31:0] X [N][2*CT], W1 [2*CT][N], W2 [N][N], Y1 [N][N], Y2 [N][N];

  task automatic issue(input instr_t i);
    @(negedge clk);
    instr = i; instr_valid = 1;
    @(posedge clk);
    while (!instr_ready) @(posedge clk);
    @(negedge clk);
    instr_valid = 0;
    // wait until the NPU is idle again
    while (!instr_ready) @(negedge clk);
  endtask

  task automatic layer_start(input int lid, input int plid, input int invn, input triplet_t w,
                             input triplet_t r, input triplet_t in_t, input bit cp, input bit ext);
    instr_t i = '0;
    i.op = OP_LAYER_START;
    i.layer.random = RND; i.layer.layer_id = LID_W'(lid); i.layer.prev_layer_id = LID_W'(plid);
    i.layer.in_vn = VN_W'(invn); i.layer.wr_trip = w; i.layer.rd_trip = r; i.layer.in_trip = in_t;
    i.layer.check_prev = cp; i.layer.ext_in = ext; i.layer.session_key = SKEY;
    issue(i);
  endtask

  task automatic tile(input bit store, input tclass_e cls, input int fid, input int n,
                      input int maddr, input int gline);
    instr_t i = '0;
    i.op = OP_TILE;
    i.tile.store = store; i.tile.cls = cls; i.tile.fmap_id = FID_W'(fid); i.tile.blk_idx = '0;
    i.tile.nblk = NBLK_W'(n); i.tile.mem_addr = MADDR_W'(maddr); i.tile.gb_line = GADDR_W'(gline);
    issue(i);
  endtask

  task automatic compute(input int k, input bit accumulate);
    instr_t i = '0;
    i.op = OP_COMPUTE;
    i.ce.a_line = GADDR_W'(G_A); i.ce.b_line = GADDR_W'(G_B); i.ce.c_line = GADDR_W'(G_C);
    i.ce.k_len = 16'(k); i.ce.accumulate = accumulate;
    issue(i);
  endtask

  task automatic layer_end(output bit ok);
    instr_t i = '0;
    i.op = OP_LAYER_END;
    @(negedge clk);
    instr = i; instr_valid = 1;
    @(negedge clk);
    instr_valid = 0;
    while (!layer_done) @(negedge clk);
    ok = layer_ok;
  endtask

  // lay a matrix slice out in the A/B line format and encrypt it for memory:
  // rows r0.. of a column-major matrix, 16 words per line
  function automatic block_t pack(logic [31:0] v[16]);
    block_t b;
    for (int w = 0; w < 16; w++) b[32*w +: 32] = v[w];
    return b;
  endfunction

  task automatic host_write(input int maddr, input int fid, input int lid, input int vn,
                            input int idx, input block_t plain);
    u_mem.mem[maddr] = plain ^ block_pad(SKEY[127:64], SKEY[63:0], LID_W'(lid), FID_W'(fid),
                                         VN_W'(vn), BIDX_W'(idx));
  endtask

  task automatic load_inputs();
    logic [31:0] v[16];
    // X channel tile t: for each channel k of the tile, 2 lines of 16 pixels
    for (int t = 0; t < 2; t++)
      for (int k = 0; k < CT; k++)
        for (int l = 0; l < 2; l++) begin
          for (int w = 0; w < 16; w++) v[w] = X[16*l + w][CT*t + k];
          host_write(M_X + 32*t + 2*k + l, 100 + t, 0, 1, 2*k + l, pack(v));
        end
    // W1 tile t (rows = input channels CT*t..): for each k, 2 lines of 16 outputs
    for (int t = 0; t < 2; t++)
      for (int k = 0; k < CT; k++)
        for (int l = 0; l < 2; l++) begin
          for (int w = 0; w < 16; w++) v[w] = W1[CT*t + k][16*l + w];
          host_write(M_W1 + 32*t + 2*k + l, 150 + t, 1, 1, 2*k + l, pack(v));
        end
    for (int t = 0; t < 2; t++)
      for (int k = 0; k < CT; k++)
        for (int l = 0; l < 2; l++) begin
          for (int w = 0; w < 16; w++) v[w] = W2[CT*t + k][16*l + w];
          host_write(M_W2 + 32*t + 2*k + l, 250 + t, 2, 1, 2*k + l, pack(v));
        end
  endtask

  // check an NPU-written matrix (column-major tiles of 16 columns) in memory
  task automatic check_out(input int maddr, input int fid0, input int lid, input int vn,
                           input logic [31:0] ref_m[N][N], input string s);
    int bad = 0;
    for (int t = 0; t < 2; t++)
      for (int b = 0; b < 32; b++) begin
        block_t p;
        int j = CT*t + b/2, l = b % 2;
        p = u_mem.mem[maddr + 32*t + b] ^ block_pad(SID, RND, LID_W'(lid), FID_W'(fid0 + t),
                                                   VN_W'(vn), BIDX_W'(b));
        for (int w = 0; w < 16; w++) if (p[32*w +: 32] != ref_m[16*l + w][j]) bad++;
      end
    chk(bad == 0, $sformatf("%s: %0d wrong words", s, bad));
  endtask

  block_t stale [64];

  task automatic run_layer1();
    bit ok;
    layer_start(1, 0, 1, '{16'd2, 16'd2, 16'd1}, '{16'd2, 16'd1, 16'd1}, '{16'd2, 16'd1, 16'd1}, 0, 1);
    for (int c = 0; c < 2; c++) begin
      tile(0, CLS_IFMAP, 100 + c, 32, M_X + 32*c, G_A);
      tile(0, CLS_WEIGHT, 150 + c, 32, M_W1 + 32*c, G_B);
      if (c > 0) for (int t = 0; t < 2; t++) tile(0, CLS_OFMAP, 200 + t, 32, M_Y1 + 32*t, G_C + 32*t);
      compute(CT, c > 0);
      for (int t = 0; t < 2; t++) tile(1, CLS_OFMAP, 200 + t, 32, M_Y1 + 32*t, G_C + 32*t);
      if (c == 0) for (int b = 0; b < 64; b++) stale[b] = u_mem.mem[M_Y1 + b];
    end
    layer_end(ok);
    chk(ok, "layer 1 ends without breach");
  endtask

  task automatic run_layer2(output bit ok);
    layer_start(2, 1, 2, '{16'd2, 16'd1, 16'd1}, '{16'd0, 16'd0, 16'd0}, '{16'd2, 16'd1, 16'd1}, 1, 0);
    for (int c = 0; c < 2; c++) begin
      tile(0, CLS_IFMAP, 200 + c, 32, M_Y1 + 32*c, G_A);
      tile(0, CLS_WEIGHT, 250 + c, 32, M_W2 + 32*c, G_B);
      compute(CT, c > 0);
    end
    for (int t = 0; t < 2; t++) tile(1, CLS_OFMAP, 300 + t, 32, M_Y2 + 32*t, G_C + 32*t);
    layer_end(ok);
  endtask

  task automatic reset_npu();
    @(negedge clk); rst_n = 0;
    @(negedge clk); rst_n = 1;
  endtask

  initial begin
    bit ok;
    int cyc0;
    instr = '0;
    #1 rst_n = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    foreach (X[i, k])  X[i][k]  = $urandom_range(0, 255);
    foreach (W1[k, j]) W1[k][j] = $urandom_range(0, 255) - 128;
    foreach (W2[k, j]) W2[k][j] = $urandom_range(0, 255) - 128;
    foreach (Y1[i, j]) begin Y1[i][j] = 0; foreach (W1[k]) Y1[i][j] += X[i][k] * W1[k][j]; end
    foreach (Y2[i, j]) begin Y2[i][j] = 0; foreach (W2[k]) Y2[i][j] += Y1[i][k] * W2[k][j]; end
    load_inputs();

    // ---- run 1: honest
    cyc0 = int'(u_mem.now);
    run_layer1();
    check_out(M_Y1, 200, 1, 2, Y1, "Y1 in memory (VN 2)");
    run_layer2(ok);
    chk(ok, "layer 2 check of layer 1 passes");
    check_out(M_Y2, 300, 2, 1, Y2, "Y2 in memory (VN 1)");
    layer_start(3, 2, 1, '{16'd0, 16'd0, 16'd0}, '{16'd0, 16'd0, 16'd0}, '{16'd2, 16'd2, 16'd1}, 1, 0);
    for (int r = 0; r < 2; r++)
      for (int t = 0; t < 2; t++) tile(0, CLS_IFMAP, 300 + t, 32, M_Y2 + 32*t, G_A + 32*t);
    layer_end(ok);
    chk(ok, "layer 3 check of layer 2 passes");
    chk(!breach, "no breach in the honest run");
    $display("honest run: %0d clocks", int'(u_mem.now) - cyc0);

    // ---- run 2: tampered Y1 block
    reset_npu();
    run_layer1();
    u_mem.mem[M_Y1 + 37][200] ^= 1'b1;
    run_layer2(ok);
    chk(!ok && breach, "tampered ofmap is detected");

    // ---- run 3: replay of the stale partial sums of layer 1
    reset_npu();
    run_layer1();
    for (int b = 0; b < 32; b++) u_mem.mem[M_Y1 + 32 + b] = stale[32 + b];
    run_layer2(ok);
    chk(!ok && breach, "replayed old version is detected");

    repeat (4) @(posedge clk);
    // ---- every mechanism must have happened
    $display("partial-sum reloads %0d, VN-2 stores %0d, first reads %0d, re-reads %0d",
             n_psum_reload, n_vn2_store, n_first, n_reread);
    $display("session-key blocks %0d, memory stalls %0d, accumulating computes %0d",
             n_session, n_mem_stall, n_accum);
    $display("passed layer checks %0d, breaches reported %0d", n_ok_check, n_breach);
    chk(n_psum_reload == 3 * 64, "partial sums reloaded");
    chk(n_vn2_store == 3 * 64, "VN advanced to 2");
    chk(n_first == 64 + 3 * 64, "first reads marked");
    chk(n_reread == 64, "second reads of the same tiles");
    chk(n_session > 0, "host data decrypted with the session key");
    chk(n_mem_stall > 0, "memory back-pressure");
    chk(n_accum > 0, "accumulating computes");
    chk(n_ok_check == 2, "layer checks passed");
    chk(n_breach == 2, "breaches reported");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
