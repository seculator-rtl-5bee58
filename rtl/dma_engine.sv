// dma_engine: moves one tile at a time between the global buffer and shared
// memory, through the security module.
//
// A tile is `nblk` consecutive 64-byte blocks: buffer lines gb_line.., memory
// block addresses mem_addr.., block indices blk_idx.. of fmap `fmap_id`.
// Store (buffer -> memory): read the line, hand the plaintext to the security
// module, write the returned ciphertext to memory. Load (memory -> buffer):
// read the block from memory, hand the ciphertext to the security module,
// write the returned plaintext to the buffer. The last block of a tile is
// flagged so that the security module steps its version-number generator once
// per tile. The security module is where the paper's write and read observers
// sit: it sees every block that leaves or enters the chip.
//
// Interface: a command is taken on `cmd_valid && cmd_ready`; `done` pulses when
// the tile's last block has been written. Memory port: one block per request,
// `mem_req_valid` held until `mem_req_ready`; a read returns one `mem_rvalid`
// pulse with `mem_rdata` some cycles later. Blocks are handled one after
// another (no overlap), so a tile takes nblk times (security latency + memory
// latency + 3) clocks.
//
// The paper only names the DMA engine; everything here is this design's own.
module dma_engine
  import seculator_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  // command
  input  logic               cmd_valid,
  output logic               cmd_ready,
  input  tile_cmd_t          cmd,
  output logic               done,
  // global buffer port A
  output logic               gb_en,
  output logic               gb_we,
  output logic [GADDR_W-1:0] gb_addr,
  output block_t             gb_wdata,
  input  block_t             gb_rdata,
  // security module
  output logic               sec_valid,
  input  logic               sec_ready,
  output sec_req_t           sec_req,
  input  logic               sec_resp_valid,
  input  block_t             sec_resp_data,
  // shared memory
  output logic               mem_req_valid,
  input  logic               mem_req_ready,
  output logic               mem_we,
  output logic [MADDR_W-1:0] mem_addr,
  output block_t             mem_wdata,
  input  logic               mem_rvalid,
  input  block_t             mem_rdata
);

  typedef enum logic [2:0] {D_IDLE, D_GB_RD, D_GB_WAIT, D_MEM_RD, D_MEM_WAIT, D_SEC, D_SEC_WAIT, D_OUT}
    dstate_e;
  dstate_e st;

  tile_cmd_t   cmd_q;
  logic [NBLK_W-1:0] n;          // block within the tile
  block_t      buf_q;            // block being moved
  logic        last;

  assign last      = (n == cmd_q.nblk - NBLK_W'(1));
  assign cmd_ready = (st == D_IDLE);

  always_comb begin
    sec_req           = '0;
    sec_req.store     = cmd_q.store;
    sec_req.cls       = cmd_q.store ? CLS_OFMAP : cmd_q.cls;
    sec_req.tile_last = last;
    sec_req.fmap_id   = cmd_q.fmap_id;
    sec_req.blk_idx   = cmd_q.blk_idx + BIDX_W'(n);
    sec_req.data      = buf_q;
  end
  assign sec_valid = (st == D_SEC);

  assign gb_en    = (st == D_GB_RD) || (st == D_OUT && !cmd_q.store);
  assign gb_we    = (st == D_OUT);
  assign gb_addr  = cmd_q.gb_line + GADDR_W'(n);
  assign gb_wdata = buf_q;

  assign mem_req_valid = (st == D_MEM_RD) || (st == D_OUT && cmd_q.store);
  assign mem_we        = (st == D_OUT);
  assign mem_addr      = cmd_q.mem_addr + MADDR_W'(n);
  assign mem_wdata     = buf_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st    <= D_IDLE;
      cmd_q <= '0;
      n     <= '0;
      buf_q <= '0;
      done  <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (st)
        D_IDLE: if (cmd_valid) begin
          cmd_q <= cmd;
          n     <= '0;
          st    <= cmd.store ? D_GB_RD : D_MEM_RD;
        end
        D_GB_RD:   st <= D_GB_WAIT;
        D_GB_WAIT: begin buf_q <= gb_rdata; st <= D_SEC; end
        D_MEM_RD:  if (mem_req_ready) st <= D_MEM_WAIT;
        D_MEM_WAIT: if (mem_rvalid) begin buf_q <= mem_rdata; st <= D_SEC; end
        D_SEC:     if (sec_ready) st <= D_SEC_WAIT;
        D_SEC_WAIT: if (sec_resp_valid) begin buf_q <= sec_resp_data; st <= D_OUT; end
        D_OUT: if (!cmd_q.store || mem_req_ready) begin
          if (last) begin
            done <= 1'b1;
            st   <= D_IDLE;
          end else begin
            n  <= n + NBLK_W'(1);
            st <= cmd_q.store ? D_GB_RD : D_MEM_RD;
          end
        end
        default: st <= D_IDLE;
      endcase
    end
  end

  a_mem_hold: assert property (@(posedge clk) disable iff (!rst_n)
                               mem_req_valid && !mem_req_ready |=> mem_req_valid && $stable(mem_addr));
  a_nblk:     assert property (@(posedge clk) disable iff (!rst_n)
                               cmd_valid && cmd_ready |-> cmd.nblk != '0);

endmodule
