// tb_global_buffer: writes random lines through both ports of a full-size
// global buffer, reads them back through the other port, and checks the
// one-cycle read latency and the first and last lines.
//
// The 240 KB size follows the paper; ports and latency are this design's own.
module tb_global_buffer;
  import seculator_pkg::*;
  logic clk = 0;
  logic a_en = 0, a_we = 0, b_en = 0, b_we = 0;
  logic [GADDR_W-1:0] a_addr = 0, b_addr = 0;
  block_t a_wdata = '0, b_wdata = '0, a_rdata, b_rdata;
  int checks = 0, failures = 0;
  localparam int LINES = 245760 / 64;

  global_buffer dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic block_t pat(int a, int s);
    block_t b;
    for (int i = 0; i < 16; i++) b[32*i +: 32] = 32'(a * 131 + i * 7 + s * 1000003);
    return b;
  endfunction

  initial begin
    int addrs[$];
    addrs = '{0, 1, 2, 100, 1234, 2047, 2048, 3000, LINES - 2, LINES - 1};
    for (int i = 0; i < 30; i++) addrs.push_back($urandom_range(3, LINES - 3));
    // port A writes, port B reads
    foreach (addrs[i]) begin
      @(negedge clk); a_en = 1; a_we = 1; a_addr = GADDR_W'(addrs[i]); a_wdata = pat(addrs[i], 1);
    end
    @(negedge clk); a_en = 0; a_we = 0;
    foreach (addrs[i]) begin
      @(negedge clk); b_en = 1; b_we = 0; b_addr = GADDR_W'(addrs[i]);
      @(negedge clk); b_en = 0;
      checks++;
      if (b_rdata != pat(addrs[i], 1)) begin failures++; $display("FAIL B read %0d", addrs[i]); end
    end
    // port B writes, port A reads, back to back (read data one cycle later)
    foreach (addrs[i]) begin
      @(negedge clk); b_en = 1; b_we = 1; b_addr = GADDR_W'(addrs[i]); b_wdata = pat(addrs[i], 2);
    end
    @(negedge clk); b_en = 0; b_we = 0;
    a_en = 1; a_we = 0; a_addr = GADDR_W'(addrs[0]);
    for (int i = 1; i <= addrs.size(); i++) begin
      @(negedge clk);
      checks++;
      if (a_rdata != pat(addrs[i-1], 2)) begin failures++; $display("FAIL A read %0d", addrs[i-1]); end
      if (i < addrs.size()) a_addr = GADDR_W'(addrs[i]);
    end
    a_en = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
