// vn_generator: on-chip version-number (VN) generator.
//
// Produces the VN sequence of the master equation (1^eta, 2^eta ... kappa^eta)^rho:
// each VN value v = 1..kappa is repeated eta times (once per tile of a group of
// eta tiles), and the whole run 1..kappa is repeated rho times. The triplet
// <eta, kappa, rho> is loaded by the host at the start of a layer; afterwards
// the generator needs only these counters, in place of a per-tile VN table.
//
// Interface: `load` (one cycle) captures the triplet and restarts the sequence
// at VN 1. `vn` shows the VN of the next tile; `step` (one cycle per tile)
// advances to the following one. `first` is high while the value is 1; used on
// an input stream whose value counts read passes, it marks the first read of a
// tile. `done` rises after eta*kappa*rho steps; a zero in the triplet gives an
// empty sequence (done at once), which encodes the paper's "no read pattern".
// Timing: `vn`, `first` and `done` are registered and change the cycle after
// `load` or `step`. `step` while `done` is ignored.
//
// From the paper: the master equation and the triplet. Own choices: counter
// widths, the empty-sequence encoding, and the use of `first` for first-read
// detection (the paper states such a circuit exists but does not show it).
module vn_generator
  import seculator_pkg::*;
#(
  parameter int unsigned CW  = TRIP_W,
  parameter int unsigned VNW = VN_W
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           load,
  input  logic [CW-1:0]  eta,
  input  logic [CW-1:0]  kappa,
  input  logic [CW-1:0]  rho,
  input  logic           step,
  output logic [VNW-1:0] vn,
  output logic           first,
  output logic           done
);

  logic [CW-1:0] eta_q, kappa_q, rho_q;
  logic [CW-1:0] cnt_eta, cnt_rho;
  logic [CW-1:0] vn_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      eta_q   <= '0;
      kappa_q <= '0;
      rho_q   <= '0;
      cnt_eta <= CW'(1);
      cnt_rho <= CW'(1);
      vn_q    <= CW'(1);
      done    <= 1'b1;
    end else if (load) begin
      eta_q   <= eta;
      kappa_q <= kappa;
      rho_q   <= rho;
      cnt_eta <= CW'(1);
      cnt_rho <= CW'(1);
      vn_q    <= CW'(1);
      done    <= (eta == '0) || (kappa == '0) || (rho == '0);
    end else if (step && !done) begin
      if (cnt_eta < eta_q) begin
        cnt_eta <= cnt_eta + CW'(1);
      end else begin
        cnt_eta <= CW'(1);
        if (vn_q < kappa_q) begin
          vn_q <= vn_q + CW'(1);
        end else begin
          vn_q <= CW'(1);
          if (cnt_rho < rho_q) cnt_rho <= cnt_rho + CW'(1);
          else                 done    <= 1'b1;
        end
      end
    end
  end

  assign vn    = VNW'(vn_q);
  assign first = (vn_q == CW'(1));

endmodule
