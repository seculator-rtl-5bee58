// sha256_core: SHA-256 compression function (FIPS 180-4), iterative.
//
// Hashes a message that the caller has already padded into 512-bit blocks.
// `init` starts a new message with `block` as its first block (state from the
// standard initial hash value); `next` continues the current message with
// another block. Each block takes 64 round cycles plus one cycle to add the
// working variables into the hash state: `done` pulses 66 cycles after
// `init`/`next`, with `digest` valid from then on. `ready` is high when a new
// block may be given. The message schedule is kept as a 16-word sliding window.
//
// The paper names SHA-256 only; the round-per-clock structure is this design's
// choice.
module sha256_core (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         init,
  input  logic         next,
  input  logic [511:0] block,
  output logic         ready,
  output logic         done,
  output logic [255:0] digest
);

  localparam logic [31:0] K [64] = '{
    32'h428a2f98, 32'h71374491, 32'hb5c0fbcf, 32'he9b5dba5, 32'h3956c25b, 32'h59f111f1, 32'h923f82a4, 32'hab1c5ed5,
    32'hd807aa98, 32'h12835b01, 32'h243185be, 32'h550c7dc3, 32'h72be5d74, 32'h80deb1fe, 32'h9bdc06a7, 32'hc19bf174,
    32'he49b69c1, 32'hefbe4786, 32'h0fc19dc6, 32'h240ca1cc, 32'h2de92c6f, 32'h4a7484aa, 32'h5cb0a9dc, 32'h76f988da,
    32'h983e5152, 32'ha831c66d, 32'hb00327c8, 32'hbf597fc7, 32'hc6e00bf3, 32'hd5a79147, 32'h06ca6351, 32'h14292967,
    32'h27b70a85, 32'h2e1b2138, 32'h4d2c6dfc, 32'h53380d13, 32'h650a7354, 32'h766a0abb, 32'h81c2c92e, 32'h92722c85,
    32'ha2bfe8a1, 32'ha81a664b, 32'hc24b8b70, 32'hc76c51a3, 32'hd192e819, 32'hd6990624, 32'hf40e3585, 32'h106aa070,
    32'h19a4c116, 32'h1e376c08, 32'h2748774c, 32'h34b0bcb5, 32'h391c0cb3, 32'h4ed8aa4a, 32'h5b9cca4f, 32'h682e6ff3,
    32'h748f82ee, 32'h78a5636f, 32'h84c87814, 32'h8cc70208, 32'h90befffa, 32'ha4506ceb, 32'hbef9a3f7, 32'hc67178f2
  };

  localparam logic [255:0] H0 = {32'h6a09e667, 32'hbb67ae85, 32'h3c6ef372, 32'ha54ff53a,
                                 32'h510e527f, 32'h9b05688c, 32'h1f83d9ab, 32'h5be0cd19};

  function automatic logic [31:0] rotr(input logic [31:0] x, input int n);
    return (x >> n) | (x << (32 - n));
  endfunction

  logic [31:0]  w [16];
  logic [31:0]  a, b, c, d, e, f, g, h;
  logic [255:0] hs;
  logic [6:0]   rnd;
  logic         busy;

  logic [31:0] s0, s1, ch, maj, t1, t2, wnew, wt;

  always_comb begin
    wt   = w[0];
    s1   = rotr(e, 6) ^ rotr(e, 11) ^ rotr(e, 25);
    ch   = (e & f) ^ (~e & g);
    t1   = h + s1 + ch + K[rnd[5:0]] + wt;
    s0   = rotr(a, 2) ^ rotr(a, 13) ^ rotr(a, 22);
    maj  = (a & b) ^ (a & c) ^ (b & c);
    t2   = s0 + maj;
    // W[t+16] = sigma1(W[t+14]) + W[t+9] + sigma0(W[t+1]) + W[t]
    wnew = (rotr(w[14], 17) ^ rotr(w[14], 19) ^ (w[14] >> 10)) + w[9]
         + (rotr(w[1], 7) ^ rotr(w[1], 18) ^ (w[1] >> 3)) + w[0];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0;
      done <= 1'b0;
      rnd  <= '0;
      hs   <= H0;
      {a, b, c, d, e, f, g, h} <= '0;
      for (int i = 0; i < 16; i++) w[i] <= '0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (init || next) begin
          logic [255:0] base;
          base = init ? H0 : hs;
          hs   <= base;
          {a, b, c, d, e, f, g, h} <= base;
          for (int i = 0; i < 16; i++) w[i] <= block[511-32*i -: 32];
          rnd  <= '0;
          busy <= 1'b1;
        end
      end else if (rnd < 7'd64) begin
        h <= g; g <= f; f <= e; e <= d + t1;
        d <= c; c <= b; b <= a; a <= t1 + t2;
        for (int i = 0; i < 15; i++) w[i] <= w[i+1];
        w[15] <= wnew;
        rnd <= rnd + 7'd1;
      end else begin
        hs <= {hs[255:224] + a, hs[223:192] + b, hs[191:160] + c, hs[159:128] + d,
               hs[127:96]  + e, hs[95:64]    + f, hs[63:32]    + g, hs[31:0]     + h};
        busy <= 1'b0;
        done <= 1'b1;
      end
    end
  end

  assign ready  = !busy;
  assign digest = hs;

endmodule
