// aes_ctr_unit: counter-mode encryption and decryption of one 64-byte block.
//
// Four AES-128 engines run in parallel, one per 16-byte quarter of the block.
// Engine e encrypts the counter
//   { layer_id[15:0], fmap_id[15:0], vn[31:0], blk_idx[31:0], 30'b0, e[1:0] }
// i.e. the major counter (fmap id, layer id) and the minor counter (VN, block
// index), plus the engine number so that the four pads differ. The resulting
// 512-bit one-time pad is XORed with `din`; the same operation encrypts and
// decrypts. The key is { secret_id, random } for data the NPU writes, or the
// host's session key for data the host supplies (chosen by the caller).
//
// Interface: the inputs are sampled with `start`; `done` pulses with `dout`
// valid 11 cycles later (the AES core latency), and `dout` holds until the next
// start. Engine e's pad covers bytes 16e..16e+15 of the block, byte 0 being
// bits [511:504].
//
// From the paper: four parallel AES-128 engines, counter mode, the fields of
// the major and minor counters and the key made of the secret id and a random
// number. Own choices: field widths and order, and the engine index in the
// counter.
module aes_ctr_unit
  import seculator_pkg::*;
#(
  parameter int unsigned N_ENG = 4
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [127:0]      key,
  input  logic [LID_W-1:0]  layer_id,
  input  logic [FID_W-1:0]  fmap_id,
  input  logic [VN_W-1:0]   vn,
  input  logic [BIDX_W-1:0] blk_idx,
  input  block_t            din,
  output block_t            dout,
  output logic              done
);

  localparam int unsigned SEG = BLOCK_BITS / N_ENG;   // 128 bits per engine

  logic [N_ENG-1:0] eng_done;
  block_t           pad;
  block_t           din_q;

  always_ff @(posedge clk) if (start) din_q <= din;

  for (genvar e = 0; e < N_ENG; e++) begin : g_eng
    logic [127:0] ctr;
    logic         busy;
    assign ctr = {layer_id, fmap_id, vn, blk_idx, 30'b0, 2'(e)};
    aes128_core u_aes (
      .clk   (clk),
      .rst_n (rst_n),
      .start (start),
      .key   (key),
      .din   (ctr),
      .dout  (pad[BLOCK_BITS-1-SEG*e -: SEG]),
      .busy  (busy),
      .done  (eng_done[e])
    );
  end

  assign dout = din_q ^ pad;
  assign done = eng_done[0];

  // all engines start together and so finish together
  a_lockstep: assert property (@(posedge clk) disable iff (!rst_n)
                               eng_done[0] |-> &eng_done);

endmodule
