// global_buffer: the NPU's on-chip SRAM (240 KB by default).
//
// Holds ifmap, ofmap and weight tiles while a layer runs. It is organised in
// lines of one 64-byte block, the unit of every transfer, and has two
// independent synchronous ports: port A for the DMA engine, port B for the
// compute engine. A read returns the line one cycle after `*_en` with `*_we`
// low; a write stores `*_wdata` at the clock edge. Which lines hold ifmaps,
// ofmaps or weights is decided by the instructions, not by the hardware. If
// both ports write the same line in one cycle, port B's value is kept.
//
// From the paper: the global buffer, its 240 KB size and its three kinds of
// content. Own choices: the line organisation, two ports and the latency.
module global_buffer
  import seculator_pkg::*;
#(
  parameter int unsigned GB_BYTES = 245760,
  parameter int unsigned LINES    = GB_BYTES / BLOCK_BYTES,
  parameter int unsigned AW       = GADDR_W
) (
  input  logic          clk,
  input  logic          a_en,
  input  logic          a_we,
  input  logic [AW-1:0] a_addr,
  input  block_t        a_wdata,
  output block_t        a_rdata,
  input  logic          b_en,
  input  logic          b_we,
  input  logic [AW-1:0] b_addr,
  input  block_t        b_wdata,
  output block_t        b_rdata
);

  block_t mem [LINES];

  always_ff @(posedge clk) begin
    if (a_en) begin
      if (a_we) mem[a_addr] <= a_wdata;
      else      a_rdata     <= mem[a_addr];
    end
    if (b_en) begin
      if (b_we) mem[b_addr] <= b_wdata;
      else      b_rdata     <= mem[b_addr];
    end
  end

endmodule
