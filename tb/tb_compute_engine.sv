// tb_compute_engine: runs matrix-multiply tiles on the compute engine with a
// global buffer, for a small 5x20 array (partial last line) and the full
// 32x32 array, and compares C with the product computed here: a first tile
// that overwrites C and a second one that accumulates onto it. Checks the
// latency 1 + K*(LA+LB) + (ROWS+COLS+2) + 2*COLS*LA + 2.
//
// The 32x32 array follows the paper; the matrix-multiply lowering, buffer layout
// and latency checked here are this design's own choices.
module tb_compute_engine;
  import seculator_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---- two configurations
  logic s_start [2];
  ce_cmd_t s_cmd [2];
  logic s_busy [2], s_done [2];
  logic s_en [2], s_we [2];
  logic [GADDR_W-1:0] s_addr [2];
  block_t s_wdata [2], s_rdata [2];
  // testbench access to the buffers through port A
  logic t_en [2], t_we [2];
  logic [GADDR_W-1:0] t_addr [2];
  block_t t_wdata [2], t_rdata [2];

  compute_engine #(.ROWS(5), .COLS(20)) dut_s (.clk, .rst_n, .start(s_start[0]), .cmd(s_cmd[0]),
    .busy(s_busy[0]), .done(s_done[0]), .gb_en(s_en[0]), .gb_we(s_we[0]), .gb_addr(s_addr[0]),
    .gb_wdata(s_wdata[0]), .gb_rdata(s_rdata[0]));
  global_buffer #(.GB_BYTES(64*512)) gb_s (.clk, .a_en(t_en[0]), .a_we(t_we[0]), .a_addr(t_addr[0]),
    .a_wdata(t_wdata[0]), .a_rdata(t_rdata[0]), .b_en(s_en[0]), .b_we(s_we[0]), .b_addr(s_addr[0]),
    .b_wdata(s_wdata[0]), .b_rdata(s_rdata[0]));

  compute_engine dut_l (.clk, .rst_n, .start(s_start[1]), .cmd(s_cmd[1]),
    .busy(s_busy[1]), .done(s_done[1]), .gb_en(s_en[1]), .gb_we(s_we[1]), .gb_addr(s_addr[1]),
    .gb_wdata(s_wdata[1]), .gb_rdata(s_rdata[1]));
  global_buffer #(.GB_BYTES(64*1024)) gb_l (.clk, .a_en(t_en[1]), .a_we(t_we[1]), .a_addr(t_addr[1]),
    .a_wdata(t_wdata[1]), .a_rdata(t_rdata[1]), .b_en(s_en[1]), .b_we(s_we[1]), .b_addr(s_addr[1]),
    .b_wdata(s_wdata[1]), .b_rdata(s_rdata[1]));

  task automatic chk(input bit c, input string s);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", s); end
  endtask

  task automatic wr(input int u, input int addr, input block_t d);
    @(negedge clk);
    t_en[u] = 1; t_we[u] = 1; t_addr[u] = GADDR_W'(addr); t_wdata[u] = d;
    @(negedge clk);
    t_en[u] = 0; t_we[u] = 0;
  endtask

  task automatic rd(input int u, input int addr, output block_t d);
    @(negedge clk);
    t_en[u] = 1; t_we[u] = 0; t_addr[u] = GADDR_W'(addr);
    @(negedge clk);
    t_en[u] = 0;
    d = t_rdata[u];
  endtask

  // one test: R x C array, K steps, optional accumulate onto existing C
  task automatic run(input int u, input int R, input int C, input int K, input int rng);
    int LA = (R + 15) / 16, LB = (C + 15) / 16;
    int a_line = 0, b_line = 200, c_line = 400;
    logic [31:0] A[][], B[][], Cm[][];
    block_t line;
    int cyc, exp_cyc;
    A = new[R]; foreach (A[i]) A[i] = new[K];
    B = new[K]; foreach (B[i]) B[i] = new[C];
    Cm = new[R]; foreach (Cm[i]) Cm[i] = new[C];
    foreach (A[i, k]) A[i][k] = $urandom_range(0, rng);
    foreach (B[k, j]) B[k][j] = $urandom_range(0, rng) - rng / 2;
    foreach (Cm[i, j]) Cm[i][j] = $urandom;
    // load operands
    for (int k = 0; k < K; k++) begin
      for (int l = 0; l < LA; l++) begin
        line = '0;
        for (int w = 0; w < 16; w++) if (l*16 + w < R) line[32*w +: 32] = A[l*16 + w][k];
        wr(u, a_line + k*LA + l, line);
      end
      for (int l = 0; l < LB; l++) begin
        line = '0;
        for (int w = 0; w < 16; w++) if (l*16 + w < C) line[32*w +: 32] = B[k][l*16 + w];
        wr(u, b_line + k*LB + l, line);
      end
    end
    for (int j = 0; j < C; j++)
      for (int l = 0; l < LA; l++) begin
        line = '0;
        for (int w = 0; w < 16; w++) if (l*16 + w < R) line[32*w +: 32] = Cm[l*16 + w][j];
        wr(u, c_line + j*LA + l, line);
      end
    // run twice: A*B (overwrite), then 2*A*B (accumulate)
    for (int pass = 1; pass <= 2; pass++) begin
      @(negedge clk);
      s_cmd[u].a_line = GADDR_W'(a_line); s_cmd[u].b_line = GADDR_W'(b_line);
      s_cmd[u].c_line = GADDR_W'(c_line); s_cmd[u].k_len = 16'(K);
      s_cmd[u].accumulate = (pass == 2);
      s_start[u] = 1;
      @(negedge clk);
      s_start[u] = 0;
      cyc = 1;
      while (!s_done[u]) begin @(negedge clk); cyc++; end
      exp_cyc = 1 + K*(LA+LB) + (R+C+2) + 2*C*LA + 2;
      chk(cyc == exp_cyc, $sformatf("%0dx%0d K=%0d latency %0d exp %0d", R, C, K, cyc, exp_cyc));
      for (int j = 0; j < C; j++)
        for (int l = 0; l < LA; l++) begin
          rd(u, c_line + j*LA + l, line);
          for (int w = 0; w < 16; w++) if (l*16 + w < R) begin
            logic [31:0] e;
            int i = l*16 + w;
            e = 0;
            for (int k = 0; k < K; k++) e += 32'(pass) * A[i][k] * B[k][j];
            chk(line[32*w +: 32] == e, $sformatf("C[%0d][%0d]=%0d exp %0d pass %0d", i, j,
                                                 line[32*w +: 32], e, pass));
          end else begin
            chk(line[32*w +: 32] == 0, "padding word untouched");
          end
        end
    end
  endtask

  initial begin
    for (int u = 0; u < 2; u++) begin
      s_start[u] = 0; s_cmd[u] = '0; t_en[u] = 0; t_we[u] = 0; t_addr[u] = '0; t_wdata[u] = '0;
    end
    repeat (2) @(negedge clk);
    rst_n = 1;
    run(0, 5, 20, 1, 10);
    run(0, 5, 20, 7, 100);
    run(1, 32, 32, 3, 50);
    run(1, 32, 32, 24, 1 << 16);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
