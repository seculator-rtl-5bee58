// security_module: encryption, version numbers and integrity of every block
// that crosses the chip boundary.
//
// It sits between the DMA engine and shared memory and handles one 64-byte
// block at a time. For each block it chooses the version number (VN) and the
// layer id that go into the counter and the MAC:
//   ofmap store  : VN from the write generator, this layer   -> MAC_W
//   ofmap load   : VN from the read generator,  this layer   -> MAC_R
//   ifmap load   : VN = in_vn (last VN of the previous layer),
//                  previous layer's id                        -> MAC_IR, MAC_FR
//                  (first read when the input generator is at value 1)
//   weight load  : VN = 1, this layer, host session key       -> no MAC
//   ifmap load of a layer whose input comes from the host (ext_in):
//                  as an ifmap load but with the session key  -> no MAC
// Data the NPU writes is encrypted with { SECRET_ID, random }; data the host
// supplies (weights, the network's input) with the host's session key.
// A generator steps once per tile, on the last block of the tile. A store
// computes the MAC of the plaintext and encrypts it; a load decrypts first and
// then computes the MAC of the recovered plaintext. The block MAC goes to the
// MAC verifier, which checks the whole layer at its end. Blocks that carry no
// MAC skip the SHA-256 step.
//
// Interface: `layer_start` (one cycle, with `cfg`) loads the three VN
// triplets and starts a layer in the verifier; `layer_end` (one cycle, only
// while idle) runs the layer check. Blocks arrive on a valid/ready channel
// (`req_valid`, `req_ready`, `req`); the result leaves as a one-cycle
// `resp_valid` pulse with `resp_data` (ciphertext for a store, plaintext for a
// load). Latency per block, from acceptance to `resp_valid`: 147 clocks (11
// of AES, 133 of SHA-256, 3 of control), 13 for a block without MAC. `breach` is sticky: a MAC mismatch at a layer end
// or a tile for an exhausted version sequence.
//
// From the paper: the VN rules per tensor class, the counter and MAC contents,
// the embedded secret id, the session key for data from the host and the
// layer-level MAC check. Own choices: the sequential AES-then-SHA schedule,
// the one-block-at-a-time interface, leaving host-supplied data unchecked (the
// paper gives no rule for it) and treating an exhausted VN sequence as a
// breach.
module security_module
  import seculator_pkg::*;
#(
  parameter logic [SID_W-1:0] SECRET_ID = 64'h5ec0_1a70_c0de_0001
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       layer_start,
  input  layer_cfg_t cfg,
  input  logic       layer_end,
  input  logic       req_valid,
  output logic       req_ready,
  input  sec_req_t   req,
  output logic       resp_valid,
  output block_t     resp_data,
  output logic       chk_done,
  output logic       breach
);

  typedef enum logic [2:0] {S_IDLE, S_AES, S_MAC_START, S_MAC, S_DONE} sstate_e;
  sstate_e st;

  layer_cfg_t cfg_q;
  sec_req_t   req_q;
  logic [VN_W-1:0]  vn_sel;
  logic [LID_W-1:0] lid_sel;
  acc_kind_e        kind_sel;
  logic [127:0]     key_sel, key_q;
  logic             first_sel, seq_err;

  // VN generators
  logic [VN_W-1:0] wr_vn, rd_vn, in_vn_cnt;
  logic wr_done, rd_done, in_done, wr_first, rd_first, in_first;
  logic wr_step, rd_step, in_step;

  vn_generator u_wr_gen (.clk, .rst_n, .load(layer_start), .eta(cfg.wr_trip.eta),
    .kappa(cfg.wr_trip.kappa), .rho(cfg.wr_trip.rho), .step(wr_step), .vn(wr_vn),
    .first(wr_first), .done(wr_done));
  vn_generator u_rd_gen (.clk, .rst_n, .load(layer_start), .eta(cfg.rd_trip.eta),
    .kappa(cfg.rd_trip.kappa), .rho(cfg.rd_trip.rho), .step(rd_step), .vn(rd_vn),
    .first(rd_first), .done(rd_done));
  vn_generator u_in_gen (.clk, .rst_n, .load(layer_start), .eta(cfg.in_trip.eta),
    .kappa(cfg.in_trip.kappa), .rho(cfg.in_trip.rho), .step(in_step), .vn(in_vn_cnt),
    .first(in_first), .done(in_done));

  // per-class choice of VN, layer id and MAC register, from the incoming request
  always_comb begin
    vn_sel    = VN_W'(1);
    lid_sel   = cfg_q.layer_id;
    kind_sel  = ACC_NONE;
    key_sel   = {SECRET_ID, cfg_q.random};
    first_sel = 1'b0;
    seq_err   = 1'b0;
    if (req.store) begin
      vn_sel   = wr_vn;
      kind_sel = ACC_W;
      seq_err  = wr_done;
    end else begin
      unique case (req.cls)
        CLS_OFMAP: begin
          vn_sel   = rd_vn;
          kind_sel = ACC_R;
          seq_err  = rd_done;
        end
        CLS_IFMAP: begin
          vn_sel    = cfg_q.in_vn;
          lid_sel   = cfg_q.prev_layer_id;
          first_sel = in_first;
          seq_err   = in_done;
          if (cfg_q.ext_in) begin
            kind_sel = ACC_NONE;
            key_sel  = cfg_q.session_key;
          end else begin
            kind_sel = ACC_IN;
          end
        end
        default: begin
          vn_sel   = VN_W'(1);
          kind_sel = ACC_NONE;
          key_sel  = cfg_q.session_key;
        end
      endcase
    end
  end

  logic [VN_W-1:0]  vn_q;
  logic [LID_W-1:0] lid_q;
  acc_kind_e        kind_q;
  logic             first_q;
  logic             seq_breach;

  assign req_ready = (st == S_IDLE) && !layer_start && !layer_end;
  wire   accept    = req_valid && req_ready;

  // a tile's generator steps when its last block is accepted
  assign wr_step = accept && req.tile_last && req.store;
  assign rd_step = accept && req.tile_last && !req.store && (req.cls == CLS_OFMAP);
  assign in_step = accept && req.tile_last && !req.store && (req.cls == CLS_IFMAP);

  // crypto engines
  logic   aes_start, aes_done, mac_start, mac_ready, mac_done;
  block_t aes_out, mac_data;
  mac_t   mac_b;

  aes_ctr_unit u_aes (.clk, .rst_n, .start(aes_start), .key(key_q), .layer_id(lid_q), .fmap_id(req_q.fmap_id), .vn(vn_q),
    .blk_idx(req_q.blk_idx), .din(req_q.data), .dout(aes_out), .done(aes_done));

  assign mac_data = req_q.store ? req_q.data : aes_out;

  mac_generator u_mac (.clk, .rst_n, .start(mac_start), .secret_id(SECRET_ID),
    .layer_id(lid_q), .fmap_id(req_q.fmap_id), .vn(vn_q), .blk_idx(req_q.blk_idx),
    .data(mac_data), .ready(mac_ready), .mac(mac_b), .done(mac_done));

  logic aes_busy_q;
  assign aes_start = (st == S_AES) && !aes_busy_q;
  assign mac_start = (st == S_MAC_START);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st         <= S_IDLE;
      cfg_q      <= '0;
      req_q      <= '0;
      vn_q       <= '0;
      lid_q      <= '0;
      kind_q     <= ACC_W;
      key_q      <= '0;
      first_q    <= 1'b0;
      aes_busy_q <= 1'b0;
      seq_breach <= 1'b0;
      resp_valid <= 1'b0;
      resp_data  <= '0;
    end else begin
      resp_valid <= 1'b0;
      if (layer_start) cfg_q <= cfg;
      unique case (st)
        S_IDLE: if (accept) begin
          req_q   <= req;
          vn_q    <= vn_sel;
          lid_q   <= lid_sel;
          kind_q  <= kind_sel;
          key_q   <= key_sel;
          first_q <= first_sel;
          if (seq_err) seq_breach <= 1'b1;
          st      <= S_AES;
        end
        S_AES: begin
          aes_busy_q <= 1'b1;
          if (aes_done) begin
            aes_busy_q <= 1'b0;
            if (kind_q == ACC_NONE) begin
              resp_valid <= 1'b1;
              resp_data  <= aes_out;
              st         <= S_IDLE;
            end else begin
              st <= S_MAC_START;
            end
          end
        end
        S_MAC_START: if (mac_ready) st <= S_MAC;
        S_MAC: if (mac_done) begin
          resp_valid <= 1'b1;
          resp_data  <= aes_out;
          st         <= S_DONE;
        end
        S_DONE: st <= S_IDLE;
        default: st <= S_IDLE;
      endcase
    end
  end

  logic mv_breach;
  logic fr_ok, ir_ok;

  mac_verifier u_ver (.clk, .rst_n, .layer_start, .check_prev(cfg.check_prev),
    .acc_valid(st == S_DONE), .acc_kind(kind_q), .acc_first(first_q), .mac_b(mac_b),
    .layer_end(layer_end && st == S_IDLE), .chk_done, .fr_ok, .ir_ok, .breach(mv_breach));

  assign breach = mv_breach || seq_breach;

  a_req_stable: assert property (@(posedge clk) disable iff (!rst_n)
                                 req_valid && !req_ready |=> req_valid && $stable(req));
  a_end_idle:   assert property (@(posedge clk) disable iff (!rst_n)
                                 layer_end |-> st == S_IDLE);

endmodule
