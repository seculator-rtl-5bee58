// seculator_top: the Seculator neural processing unit.
//
// A convolution accelerator whose off-chip data is encrypted, fresh and
// integrity-checked without any per-block or per-tile state: version numbers
// come from small on-chip generators that replay the layer's known access
// pattern, and integrity is checked once per layer with XOR-accumulated MACs.
//
// Blocks: the compute engine (ROWS x COLS systolic PE array), the global
// buffer (on-chip SRAM), the DMA engine (tiles between buffer and memory) and
// the security module (VN generators, four AES-128 engines in counter mode,
// SHA-256 MAC generator, MAC verifier). Everything inside is trusted; shared
// memory and the memory bus are not.
//
// The host drives the NPU with instructions on a valid/ready port, executed
// one at a time in order:
//   OP_LAYER_START  load the layer configuration (ids, VN triplets, keys)
//   OP_TILE         move one tile between memory and the buffer (DMA engine)
//   OP_COMPUTE      run one matrix-multiply tile on the PE array
//   OP_LAYER_END    check the layer's MACs; `layer_done` pulses when done,
//                   with `layer_ok` low if a breach has been found
// `breach` is sticky until reset; the paper's response is a reboot.
// Memory port: one 64-byte block per request (see dma_engine).
//
// From the paper: the block structure of the figure of the chip (compute
// engine, global buffer with ifmaps, ofmaps and weights, DMA engine, security
// module with MAC verifier and VN generator), the 32x32 array, the 240 KB
// buffer and the layer-by-layer operation with a notification to the host.
// Own choices: the instruction set and its in-order, one-at-a-time execution
// (no overlap of transfers and computation), and plain (not encrypted)
// instructions: their protection on the host link is not described.
module seculator_top
  import seculator_pkg::*;
#(
  parameter int unsigned      ROWS      = 32,
  parameter int unsigned      COLS      = 32,
  parameter int unsigned      GB_BYTES  = 245760,
  parameter logic [SID_W-1:0] SECRET_ID = 64'h5ec0_1a70_c0de_0001
) (
  input  logic               clk,
  input  logic               rst_n,
  // host instructions
  input  logic               instr_valid,
  output logic               instr_ready,
  input  instr_t             instr,
  output logic               layer_done,
  output logic               layer_ok,
  output logic               breach,
  // shared memory
  output logic               mem_req_valid,
  input  logic               mem_req_ready,
  output logic               mem_we,
  output logic [MADDR_W-1:0] mem_addr,
  output block_t             mem_wdata,
  input  logic               mem_rvalid,
  input  block_t             mem_rdata
);

  // ---------------- instruction sequencer
  typedef enum logic [2:0] {T_IDLE, T_TILE, T_CE, T_END} tstate_e;
  tstate_e st;

  logic layer_start, layer_end, chk_done;
  logic dma_valid, dma_ready, dma_done;
  logic ce_start, ce_busy, ce_done;

  assign instr_ready = (st == T_IDLE);
  wire   take        = instr_valid && instr_ready;

  assign layer_start = take && (instr.op == OP_LAYER_START);
  assign layer_end   = take && (instr.op == OP_LAYER_END);
  assign dma_valid   = take && (instr.op == OP_TILE);
  assign ce_start    = take && (instr.op == OP_COMPUTE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st         <= T_IDLE;
      layer_done <= 1'b0;
      layer_ok   <= 1'b0;
    end else begin
      layer_done <= 1'b0;
      unique case (st)
        T_IDLE: if (take) begin
          unique case (instr.op)
            OP_TILE:      st <= T_TILE;
            OP_COMPUTE:   st <= T_CE;
            OP_LAYER_END: st <= T_END;
            default:      st <= T_IDLE;
          endcase
        end
        T_TILE: if (dma_done) st <= T_IDLE;
        T_CE:   if (ce_done)  st <= T_IDLE;
        T_END:  if (chk_done) begin
          layer_done <= 1'b1;
          layer_ok   <= !breach;   // breach is already updated when chk_done rises
          st         <= T_IDLE;
        end
        default: st <= T_IDLE;
      endcase
    end
  end


  // ---------------- global buffer
  logic               ga_en, ga_we, gb_en, gb_we;
  logic [GADDR_W-1:0] ga_addr, gb_addr;
  block_t             ga_wdata, ga_rdata, gb_wdata, gb_rdata;

  global_buffer #(.GB_BYTES(GB_BYTES)) u_gb (
    .clk, .a_en(ga_en), .a_we(ga_we), .a_addr(ga_addr), .a_wdata(ga_wdata), .a_rdata(ga_rdata),
    .b_en(gb_en), .b_we(gb_we), .b_addr(gb_addr), .b_wdata(gb_wdata), .b_rdata(gb_rdata));

  // ---------------- compute engine
  compute_engine #(.ROWS(ROWS), .COLS(COLS)) u_ce (
    .clk, .rst_n, .start(ce_start), .cmd(instr.ce), .busy(ce_busy), .done(ce_done),
    .gb_en, .gb_we, .gb_addr, .gb_wdata, .gb_rdata);

  // ---------------- DMA engine and security module
  logic     sec_valid, sec_ready, sec_resp_valid;
  sec_req_t sec_req;
  block_t   sec_resp_data;

  dma_engine u_dma (
    .clk, .rst_n, .cmd_valid(dma_valid), .cmd_ready(dma_ready), .cmd(instr.tile), .done(dma_done),
    .gb_en(ga_en), .gb_we(ga_we), .gb_addr(ga_addr), .gb_wdata(ga_wdata), .gb_rdata(ga_rdata),
    .sec_valid, .sec_ready, .sec_req, .sec_resp_valid, .sec_resp_data,
    .mem_req_valid, .mem_req_ready, .mem_we, .mem_addr, .mem_wdata, .mem_rvalid, .mem_rdata);

  security_module #(.SECRET_ID(SECRET_ID)) u_sec (
    .clk, .rst_n, .layer_start, .cfg(instr.layer), .layer_end,
    .req_valid(sec_valid), .req_ready(sec_ready), .req(sec_req),
    .resp_valid(sec_resp_valid), .resp_data(sec_resp_data), .chk_done, .breach);

  a_units_idle: assert property (@(posedge clk) disable iff (!rst_n)
                                 take |-> dma_ready && !ce_busy);

endmodule
