// mac_generator: per-block MAC, MAC = SHA-256(P || L || F || VN || I || B).
//
// P is the accelerator's secret id (64 bits), L the layer id (16), F the fmap
// id (16), VN the version number (32), I the block index within the fmap (32)
// and B the 64-byte plaintext block: a 672-bit message. It is padded by the
// SHA-256 rules (a 1 bit, zeros, the 64-bit length 672) into two 512-bit
// blocks, which are fed to one sha256_core one after the other.
//
// Interface: inputs are sampled with `start` (only when `ready`); `done` pulses
// with `mac` valid 132 cycles later (two blocks of 66 cycles); `mac` holds until
// the next message finishes.
//
// From the paper: the formula and the 32-byte MAC. Own choices: field widths
// and that B is the plaintext.
module mac_generator
  import seculator_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [SID_W-1:0]  secret_id,
  input  logic [LID_W-1:0]  layer_id,
  input  logic [FID_W-1:0]  fmap_id,
  input  logic [VN_W-1:0]   vn,
  input  logic [BIDX_W-1:0] blk_idx,
  input  block_t            data,
  output logic              ready,
  output mac_t              mac,
  output logic              done
);

  localparam int unsigned MSG_BITS = SID_W + LID_W + FID_W + VN_W + BIDX_W + BLOCK_BITS; // 672

  logic [MSG_BITS-1:0] msg_q;
  logic [511:0]        blk1, blk2, sha_blk;
  logic                sha_init, sha_next, sha_ready, sha_done;
  typedef enum logic [1:0] {M_IDLE, M_B1, M_B2} mstate_e;
  mstate_e st;

  assign blk1 = msg_q[MSG_BITS-1 -: 512];
  assign blk2 = {msg_q[MSG_BITS-513:0], 1'b1, {(512-(MSG_BITS-512)-1-64){1'b0}}, 64'(MSG_BITS)};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st    <= M_IDLE;
      msg_q <= '0;
    end else begin
      case (st)
        M_IDLE: if (start) begin
          msg_q <= {secret_id, layer_id, fmap_id, vn, blk_idx, data};
          st    <= M_B1;
        end
        M_B1: if (sha_done) st <= M_B2;
        M_B2: if (sha_done) st <= M_IDLE;
        default: st <= M_IDLE;
      endcase
    end
  end

  // first block right after start, second block as soon as the first is done
  logic b1_issued;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                  b1_issued <= 1'b0;
    else if (st == M_IDLE)       b1_issued <= 1'b0;
    else if (sha_init)           b1_issued <= 1'b1;
  end

  assign sha_init = (st == M_B1) && !b1_issued && sha_ready;
  assign sha_next = (st == M_B1) && sha_done;
  assign sha_blk  = sha_init ? blk1 : blk2;

  sha256_core u_sha (
    .clk    (clk),
    .rst_n  (rst_n),
    .init   (sha_init),
    .next   (sha_next),
    .block  (sha_blk),
    .ready  (sha_ready),
    .done   (sha_done),
    .digest (mac)
  );

  assign ready = (st == M_IDLE);
  assign done  = (st == M_B2) && sha_done;

endmodule
