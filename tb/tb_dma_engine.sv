// tb_dma_engine: moves tiles between a global buffer and the memory model
// through the security module. A store tile must leave the reference
// ciphertext (plaintext XOR AES-CTR pad with VN 1, then VN 2) at consecutive
// memory addresses; a load tile of the same blocks must put the plaintext back
// into other buffer lines. The memory refuses a third of the requests at random.
//
// The DMA engine is only named in the paper; the tile command and bus checked here
// are this design's own choices.
module tb_dma_engine;
  import seculator_pkg::*;
  import crypto_ref_pkg::*;
  localparam logic [63:0] SID = 64'h5ec0_1a70_c0de_0001;
  localparam logic [63:0] RND = 64'h1111_2222_3333_4444;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a real edge, so the asynchronous reset acts before the first clock
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic cmd_valid = 0, cmd_ready, done;
  tile_cmd_t cmd;
  logic gb_en, gb_we, t_en = 0, t_we = 0;
  logic [GADDR_W-1:0] gb_addr, t_addr = 0;
  block_t gb_wdata, gb_rdata, t_wdata = '0, t_rdata;
  logic sec_valid, sec_ready, sec_resp_valid;
  sec_req_t sec_req;
  block_t sec_resp_data;
  logic mem_req_valid, mem_req_ready, mem_we, mem_rvalid;
  logic [MADDR_W-1:0] mem_addr;
  block_t mem_wdata, mem_rdata;
  logic layer_start = 0, layer_end = 0, chk_done, breach;
  layer_cfg_t cfg;

  dma_engine dut (.*);
  global_buffer #(.GB_BYTES(64*256)) u_gb (.clk, .a_en(gb_en), .a_we(gb_we), .a_addr(gb_addr),
    .a_wdata(gb_wdata), .a_rdata(gb_rdata), .b_en(t_en), .b_we(t_we), .b_addr(t_addr),
    .b_wdata(t_wdata), .b_rdata(t_rdata));
  security_module #(.SECRET_ID(SID)) u_sec (.clk, .rst_n, .layer_start, .cfg, .layer_end,
    .req_valid(sec_valid), .req_ready(sec_ready), .req(sec_req), .resp_valid(sec_resp_valid),
    .resp_data(sec_resp_data), .chk_done, .breach);
  mem_model #(.DEPTH(1024), .LAT(20), .BUSY_PCT(33)) u_mem (.*);

  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit c, input string s);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", s); end
  endtask

  task automatic gbw(input int a, input block_t d);
    @(negedge clk); t_en = 1; t_we = 1; t_addr = GADDR_W'(a); t_wdata = d;
    @(negedge clk); t_en = 0; t_we = 0;
  endtask
  task automatic gbr(input int a, output block_t d);
    @(negedge clk); t_en = 1; t_we = 0; t_addr = GADDR_W'(a);
    @(negedge clk); t_en = 0; d = t_rdata;
  endtask

  task automatic tile(input bit store, input tclass_e cls, input int fid, input int bidx,
                      input int n, input int maddr, input int gline);
    @(negedge clk);
    cmd = '0;
    cmd.store = store; cmd.cls = cls; cmd.fmap_id = FID_W'(fid); cmd.blk_idx = BIDX_W'(bidx);
    cmd.nblk = NBLK_W'(n); cmd.mem_addr = MADDR_W'(maddr); cmd.gb_line = GADDR_W'(gline);
    cmd_valid = 1;
    while (!cmd_ready) @(negedge clk);
    @(negedge clk);
    cmd_valid = 0;
    while (!done) @(negedge clk);
  endtask

  initial begin
    block_t p[6], d;
    cfg = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    cfg.random = RND; cfg.layer_id = 16'd5; cfg.prev_layer_id = 16'd4; cfg.in_vn = 32'd2;
    cfg.wr_trip = '{16'd1, 16'd2, 16'd1};   // tile VNs 1 then 2
    cfg.rd_trip = '{16'd1, 16'd1, 16'd1};
    cfg.in_trip = '{16'd1, 16'd1, 16'd1};
    @(negedge clk); layer_start = 1; @(negedge clk); layer_start = 0;

    for (int i = 0; i < 6; i++) begin
      for (int w = 0; w < 16; w++) p[i][32*w +: 32] = $urandom;
      gbw(10 + i, p[i]);
    end
    // store a 3-block tile (VN 1) and another 3-block tile (VN 2)
    tile(1, CLS_OFMAP, 7, 0, 3, 100, 10);
    tile(1, CLS_OFMAP, 7, 3, 3, 103, 13);
    for (int i = 0; i < 6; i++)
      chk(u_mem.mem[100 + i] == (p[i] ^ block_pad(SID, RND, 16'd5, 16'd7, (i < 3) ? 32'd1 : 32'd2,
                                                   32'(i))),
          $sformatf("ciphertext of block %0d", i));
    chk(u_mem.writes == 6, $sformatf("six memory writes (%0d)", u_mem.writes));
    // load the first tile back as partial sums (VN 1) into lines 40..42
    tile(0, CLS_OFMAP, 7, 0, 3, 100, 40);
    for (int i = 0; i < 3; i++) begin
      gbr(40 + i, d);
      chk(d == p[i], $sformatf("partial-sum reload block %0d", i));
    end
    // the second tile as ifmap of the next layer would use in_vn = 2 and the
    // previous layer's id; model that by a new layer whose previous layer is 5
    cfg.layer_id = 16'd6; cfg.prev_layer_id = 16'd5; cfg.in_vn = 32'd2;
    @(negedge clk); layer_start = 1; @(negedge clk); layer_start = 0;
    tile(0, CLS_IFMAP, 7, 3, 3, 103, 50);
    for (int i = 0; i < 3; i++) begin
      gbr(50 + i, d);
      chk(d == p[3 + i], $sformatf("ifmap load block %0d", i));
    end
    chk(u_mem.reads == 6, "six memory reads");
    chk(!breach, "no breach");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
