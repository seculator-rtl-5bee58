// mac_verifier: layer-level integrity check with XOR-accumulated MACs.
//
// Every block MAC that the security module computes is XORed into one of a few
// 256-bit registers instead of being stored:
//   MAC_W  (ofmap writes of a layer)          MAC_R  (ofmap reads of a layer)
//   MAC_FR (first reads of ifmap tiles)       MAC_IR (all reads of ifmap tiles)
// MAC_W and MAC_R exist twice and alternate between layers, because a layer's
// pair is still needed while the next layer runs: that layer's first reads of
// its ifmaps (the previous layer's final ofmaps) complete the check
//   MAC_W(prev) == MAC_FR xor MAC_R(prev)
// i.e. everything written by the previous layer was read back unchanged,
// either inside that layer (partial sums) or as input of this one. The ifmap
// reads must also give MAC_IR == 0 (each tile read an even number of times) or
// MAC_IR == MAC_FR (odd). MACs of kind ACC_NONE (data supplied by the host:
// weights, the first layer's input) are ignored; the paper gives no check for
// them.
//
// Interface: `layer_start` (one cycle) switches to the other register pair and
// latches the checks to run; `acc_valid` adds `mac_b` to the register chosen by
// `acc_kind` (ACC_IN also to MAC_FR when `acc_first`); `layer_end` (one cycle)
// runs the check if enabled, raises `chk_done` for one cycle the next cycle with
// the results in `fr_ok` and `ir_ok`, sets the sticky `breach` on a mismatch,
// and clears the previous layer's pair, MAC_FR and MAC_IR.
//
// From the paper: the registers, the XOR accumulation, the equation, the
// even/odd rule for MAC_IR and the two alternating pairs. Own choices: when the
// check runs, the enable bit (the first layer has no previous layer on chip)
// and the sticky breach flag (the paper reboots the system on a breach).
module mac_verifier
  import seculator_pkg::*;
(
  input  logic      clk,
  input  logic      rst_n,
  input  logic      layer_start,
  input  logic      check_prev,
  input  logic      acc_valid,
  input  acc_kind_e acc_kind,
  input  logic      acc_first,
  input  mac_t      mac_b,
  input  logic      layer_end,
  output logic      chk_done,
  output logic      fr_ok,
  output logic      ir_ok,
  output logic      breach
);

  mac_t mac_w [2];
  mac_t mac_r [2];
  mac_t mac_fr, mac_ir;
  logic bank;            // pair used by the current layer
  logic chk_prev_q;

  logic fr_eq, ir_eq;
  assign fr_eq = (mac_w[~bank] == (mac_fr ^ mac_r[~bank]));
  assign ir_eq = (mac_ir == '0) || (mac_ir == mac_fr);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mac_w[0] <= '0; mac_w[1] <= '0;
      mac_r[0] <= '0; mac_r[1] <= '0;
      mac_fr   <= '0;
      mac_ir   <= '0;
      bank     <= 1'b1;
      chk_prev_q <= 1'b0;
      chk_done <= 1'b0;
      fr_ok    <= 1'b1;
      ir_ok    <= 1'b1;
      breach   <= 1'b0;
    end else begin
      chk_done <= 1'b0;
      if (layer_start) begin
        bank       <= ~bank;
        chk_prev_q <= check_prev;
      end else if (layer_end) begin
        fr_ok    <= !chk_prev_q || fr_eq;
        ir_ok    <= !chk_prev_q || ir_eq;
        chk_done <= 1'b1;
        if (chk_prev_q && !(fr_eq && ir_eq)) breach <= 1'b1;
        mac_w[~bank] <= '0;
        mac_r[~bank] <= '0;
        mac_fr <= '0;
        mac_ir <= '0;
      end else if (acc_valid) begin
        unique case (acc_kind)
          ACC_W:  mac_w[bank] <= mac_w[bank] ^ mac_b;
          ACC_R:  mac_r[bank] <= mac_r[bank] ^ mac_b;
          ACC_IN: begin
            mac_ir <= mac_ir ^ mac_b;
            if (acc_first) mac_fr <= mac_fr ^ mac_b;
          end
          default: ;
        endcase
      end
    end
  end

  // the controller never mixes the three events in one cycle
  a_one_event: assert property (@(posedge clk) disable iff (!rst_n)
                                $onehot0({layer_start, layer_end, acc_valid}));

endmodule
