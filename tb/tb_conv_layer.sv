// tb_conv_layer: one convolution layer of a real network shape run through the
// full-size NPU: an H x H x 3 image, 3x3 filters with zero padding, 32 output
// channels. With H = 32 this is the base layer of the layer-widening study
// (32x32x3); the widened layers 56, 64, 128, 160 and 192 differ only in H and
// run the same way (set H below; the run time grows with H*H).
//
// The host lowers the convolution to a matrix product (im2col): each output
// pixel is a row of A with 27 = 3x3x3 entries, and the weights are a 27 x 32
// matrix B. It encrypts A and B with its session key. Layer 1 loads B once,
// then for every tile of 32 pixels loads the A tile, computes it and stores
// the 32 x 32 output tile (one fmap, block indices continuing across tiles;
// write triplet <tiles,1,1>). Layer 2 reads every output tile once as its
// input, which lets the NPU check layer 1 at layer 2's end. The testbench
// decrypts the output in memory and compares it with a direct convolution,
// and requires both layers to end without a breach.
//
// The layer shapes are the paper's; the lowering, the tiling and the
// one-tile-at-a-time schedule are this design's own choices.
module tb_conv_layer;
  import seculator_pkg::*;
  import crypto_ref_pkg::*;

  localparam int H  = 32;               // image side
  localparam int C  = 3;                // input channels
  localparam int KK = 9 * C;            // im2col width (27)
  localparam int M  = 32;               // output channels
  localparam int P  = H * H;            // output pixels
  localparam int T  = (P + 31) / 32;    // pixel tiles
  localparam int LK = 2 * KK;           // lines of an A or B tile (2 per k)

  localparam logic [63:0]  SID  = 64'h5ec0_1a70_c0de_0001;
  localparam logic [63:0]  RND  = 64'h1357_9bdf_2468_ace0;
  localparam logic [127:0] SKEY = 128'h000102030405060708090a0b0c0d0e0f;
  localparam int M_W = 0, M_A = 64, M_Y = 64 + T * LK;   // block addresses
  localparam int G_A = 0, G_B = 64, G_C = 128;           // buffer lines

  logic clk = 0, rst_n = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic instr_valid = 0, instr_ready, layer_done, layer_ok, breach;
  instr_t instr;
  logic mem_req_valid, mem_req_ready, mem_we, mem_rvalid;
  logic [MADDR_W-1:0] mem_addr;
  block_t mem_wdata, mem_rdata;

  seculator_top dut (.*);
  mem_model #(.DEPTH(M_Y + 64 * T), .LAT(100), .BUSY_PCT(10)) u_mem (.*);

  initial begin
    repeat (T * 40_000 + 100_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit c, input string s);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", s); end
  endtask

  task automatic issue(input instr_t i);
    @(negedge clk);
    instr = i; instr_valid = 1;
    @(posedge clk);
    while (!instr_ready) @(posedge clk);
    @(negedge clk);
    instr_valid = 0;
    while (!instr_ready) @(negedge clk);
  endtask

  task automatic layer_start(input int lid, input int plid, input triplet_t w, input triplet_t in_t,
                             input bit cp, input bit ext);
    instr_t i = '0;
    i.op = OP_LAYER_START;
    i.layer.random = RND; i.layer.layer_id = LID_W'(lid); i.layer.prev_layer_id = LID_W'(plid);
    i.layer.in_vn = VN_W'(1); i.layer.wr_trip = w; i.layer.rd_trip = '0; i.layer.in_trip = in_t;
    i.layer.check_prev = cp; i.layer.ext_in = ext; i.layer.session_key = SKEY;
    issue(i);
  endtask

  task automatic tile(input bit store, input tclass_e cls, input int fid, input int bidx, input int n,
                      input int maddr, input int gline);
    instr_t i = '0;
    i.op = OP_TILE;
    i.tile.store = store; i.tile.cls = cls; i.tile.fmap_id = FID_W'(fid); i.tile.blk_idx = BIDX_W'(bidx);
    i.tile.nblk = NBLK_W'(n); i.tile.mem_addr = MADDR_W'(maddr); i.tile.gb_line = GADDR_W'(gline);
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

  logic [31:0] X [H][H][C];
  logic [31:0] W [KK][M];

  // im2col entry k of output pixel p (zero outside the image)
  function automatic logic [31:0] a_val(int p, int k);
    int y = p / H, x = p % H, c = k % C, dx = (k / C) % 3, dy = k / (3 * C);
    int yy = y + dy - 1, xx = x + dx - 1;
    if (p >= P || yy < 0 || yy >= H || xx < 0 || xx >= H) return '0;
    return X[yy][xx][c];
  endfunction

  function automatic block_t host_pad(int lid, int fid, int idx);
    return block_pad(SKEY[127:64], SKEY[63:0], LID_W'(lid), FID_W'(fid), VN_W'(1), BIDX_W'(idx));
  endfunction

  initial begin
    bit ok;
    int bad;
    bad = 0;
    instr = '0;
    #1 rst_n = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    foreach (X[y, x, c]) X[y][x][c] = $urandom_range(0, 255);
    foreach (W[k, m]) W[k][m] = $urandom_range(0, 255) - 128;

    // host: weights (fmap 500 of layer 1) and im2col tiles (fmap 1000 + t of layer 0)
    for (int k = 0; k < KK; k++)
      for (int l = 0; l < 2; l++) begin
        block_t b;
        for (int w = 0; w < 16; w++) b[32*w +: 32] = W[k][16*l + w];
        u_mem.mem[M_W + 2*k + l] = b ^ host_pad(1, 500, 2*k + l);
      end
    for (int t = 0; t < T; t++)
      for (int k = 0; k < KK; k++)
        for (int l = 0; l < 2; l++) begin
          block_t b;
          for (int w = 0; w < 16; w++) b[32*w +: 32] = a_val(32*t + 16*l + w, k);
          u_mem.mem[M_A + LK*t + 2*k + l] = b ^ host_pad(0, 1000 + t, 2*k + l);
        end

    // layer 1: the convolution
    layer_start(1, 0, '{TRIP_W'(T), 16'd1, 16'd1}, '{TRIP_W'(T), 16'd1, 16'd1}, 0, 1);
    tile(0, CLS_WEIGHT, 500, 0, LK, M_W, G_B);
    for (int t = 0; t < T; t++) begin
      instr_t i;
      i = '0;
      tile(0, CLS_IFMAP, 1000 + t, 0, LK, M_A + LK*t, G_A);
      i.op = OP_COMPUTE;
      i.ce.a_line = GADDR_W'(G_A); i.ce.b_line = GADDR_W'(G_B); i.ce.c_line = GADDR_W'(G_C);
      i.ce.k_len = 16'(KK); i.ce.accumulate = 1'b0;
      issue(i);
      tile(1, CLS_OFMAP, 1, 64*t, 64, M_Y + 64*t, G_C);
    end
    layer_end(ok);
    chk(ok, "layer 1 ends without breach");

    // compare the encrypted output with a direct convolution
    for (int t = 0; t < T; t++)
      for (int b = 0; b < 64; b++) begin
        block_t d;
        logic [31:0] s;
        d = u_mem.mem[M_Y + 64*t + b] ^ block_pad(SID, RND, LID_W'(1), FID_W'(1), VN_W'(1),
                                                  BIDX_W'(64*t + b));
        for (int w = 0; w < 16; w++) begin
          s = '0;
          for (int k = 0; k < KK; k++) s += a_val(32*t + 16*(b % 2) + w, k) * W[k][b / 2];
          if (d[32*w +: 32] != s) bad++;
        end
      end
    chk(bad == 0, $sformatf("convolution output: %0d wrong words", bad));

    // layer 2: reads every output tile once and checks layer 1
    layer_start(2, 1, '0, '{TRIP_W'(T), 16'd1, 16'd1}, 1, 0);
    for (int t = 0; t < T; t++) tile(0, CLS_IFMAP, 1, 64*t, 64, M_Y + 64*t, G_A);
    layer_end(ok);
    chk(ok, "layer 2 check of the convolution layer passes");
    chk(!breach, "no breach");
    $display("%0dx%0dx%0d layer, %0d tiles, %0d clocks", H, H, C, T, int'(u_mem.now));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
