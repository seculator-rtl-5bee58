// seculator_pkg: types and constants shared by the Seculator NPU modules.
//
// A data block is 64 bytes (sixteen 4-byte pixels), the unit of every memory
// transfer, encryption and MAC. MACs are SHA-256 digests (32 bytes). The
// version-number (VN) triplet <eta, kappa, rho> describes the VN sequence
// (1^eta, 2^eta ... kappa^eta)^rho that a tensor sees during one layer.
// Weights and the first layer's input are encrypted by the host with a
// session key; everything the NPU writes uses its own key (secret id ||
// random number). The block size, the MAC size and the triplet follow the
// paper; the widths of
// the identifier fields (layer, fmap, VN, block index, secret id) and the
// instruction formats below are this design's own choices.
package seculator_pkg;

  localparam int unsigned BLOCK_BYTES = 64;
  localparam int unsigned BLOCK_BITS  = BLOCK_BYTES * 8;   // 512
  localparam int unsigned PIX_W       = 32;                // four-byte pixel
  localparam int unsigned MAC_BITS    = 256;
  localparam int unsigned SID_W       = 64;   // accelerator secret id
  localparam int unsigned LID_W       = 16;   // layer id
  localparam int unsigned FID_W       = 16;   // fmap id
  localparam int unsigned VN_W        = 32;   // version number
  localparam int unsigned BIDX_W      = 32;   // block index within an fmap
  localparam int unsigned TRIP_W      = 16;   // width of eta, kappa, rho
  localparam int unsigned MADDR_W     = 32;   // memory block address
  localparam int unsigned GADDR_W     = 12;   // global-buffer line address
  localparam int unsigned NBLK_W      = 12;   // blocks per tile command

  typedef logic [BLOCK_BITS-1:0] block_t;
  typedef logic [MAC_BITS-1:0]   mac_t;

  // Tensor class of a tile transfer. It decides which VN is used and which
  // layer-level MAC register the block's MAC goes into.
  typedef enum logic [1:0] {
    CLS_IFMAP   = 2'd0,   // input fmap (output of the previous layer), read-only
    CLS_OFMAP   = 2'd1,   // output fmap of this layer (partial sums), read/write
    CLS_WEIGHT  = 2'd2    // filter weights, read-only, VN = 1
  } tclass_e;

  // Which register of the MAC verifier a block MAC is XORed into.
  typedef enum logic [1:0] {
    ACC_W  = 2'd0,   // ofmap write      -> MAC_W
    ACC_R  = 2'd1,   // ofmap read       -> MAC_R
    ACC_IN = 2'd2,   // ifmap read       -> MAC_IR (and MAC_FR on a first read)
    ACC_NONE = 2'd3  // weight read, or ifmap supplied by the host: not checked
  } acc_kind_e;

  typedef struct packed {
    logic [TRIP_W-1:0] eta;
    logic [TRIP_W-1:0] kappa;
    logic [TRIP_W-1:0] rho;
  } triplet_t;

  // Per-layer configuration, sent by the host before the layer's tiles.
  typedef struct packed {
    logic [SID_W-1:0]  random;      // run-time random number (low half of key)
    logic [LID_W-1:0]  layer_id;
    logic [LID_W-1:0]  prev_layer_id;
    logic [VN_W-1:0]   in_vn;       // VN of the ifmaps: last VN of previous layer
    triplet_t          wr_trip;     // ofmap write pattern
    triplet_t          rd_trip;     // ofmap read pattern (partial sums)
    triplet_t          in_trip;     // ifmap read passes, value 1 = first read
    logic              check_prev;  // verify the previous layer at layer end
    logic              ext_in;      // ifmaps come from the host (session key)
    logic [127:0]      session_key; // host's key for data it supplies
  } layer_cfg_t;

  // One tile transfer between shared memory and the global buffer.
  typedef struct packed {
    logic               store;      // 1: buffer -> memory, 0: memory -> buffer
    tclass_e            cls;        // a store is always an ofmap
    logic [FID_W-1:0]   fmap_id;
    logic [BIDX_W-1:0]  blk_idx;    // index of the first block in the fmap
    logic [NBLK_W-1:0]  nblk;       // number of blocks in the tile (>= 1)
    logic [MADDR_W-1:0] mem_addr;   // block address of the first block
    logic [GADDR_W-1:0] gb_line;    // buffer line of the first block
  } tile_cmd_t;

  // One matrix-multiply step of the compute engine: C += A * B.
  typedef struct packed {
    logic [GADDR_W-1:0] a_line;
    logic [GADDR_W-1:0] b_line;
    logic [GADDR_W-1:0] c_line;
    logic [15:0]        k_len;      // inner dimension (>= 1)
    logic               accumulate; // 1: C += A*B, 0: C = A*B
  } ce_cmd_t;

  // Host instruction.
  typedef enum logic [2:0] {
    OP_LAYER_START = 3'd0,
    OP_TILE        = 3'd1,
    OP_COMPUTE     = 3'd2,
    OP_LAYER_END   = 3'd3
  } opcode_e;

  typedef struct packed {
    opcode_e    op;
    layer_cfg_t layer;
    tile_cmd_t  tile;
    ce_cmd_t    ce;
  } instr_t;

  // Block request from the DMA engine to the security module.
  typedef struct packed {
    logic               store;
    tclass_e            cls;
    logic               tile_last;  // last block of the tile: step the VN generator
    logic [FID_W-1:0]   fmap_id;
    logic [BIDX_W-1:0]  blk_idx;
    block_t             data;       // plaintext (store) or ciphertext (load)
  } sec_req_t;

endpackage
