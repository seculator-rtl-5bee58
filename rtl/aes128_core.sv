// aes128_core: one AES-128 encryption (FIPS-197), iterative.
//
// Seculator encrypts data in counter mode, so only the forward cipher is
// needed: the same pad decrypts. The core runs one round per clock. On `start`
// it latches the key and the input block and applies the initial AddRoundKey;
// the next ten clocks each compute one round key on the fly and one round
// (SubBytes, ShiftRows, MixColumns except in round 10, AddRoundKey). `done`
// pulses for one cycle with `dout` valid 11 cycles after `start`; `dout` then
// holds until the next `start`. `busy` is high in between; `start` while busy
// is ignored.
//
// The S-box is computed, not stored: the multiplicative inverse in GF(2^8)
// (x^254 by square-and-multiply) followed by the FIPS-197 affine map.
// The paper names AES-128 only; the round-per-clock structure and the computed
// S-box are this design's choices.
module aes128_core (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic [127:0] key,
  input  logic [127:0] din,
  output logic [127:0] dout,
  output logic         busy,
  output logic         done
);

  function automatic logic [7:0] xtime(input logic [7:0] a);
    return {a[6:0], 1'b0} ^ (a[7] ? 8'h1b : 8'h00);
  endfunction

  function automatic logic [7:0] gmul(input logic [7:0] a, input logic [7:0] b);
    logic [7:0] p = '0;
    logic [7:0] x = a;
    for (int i = 0; i < 8; i++) begin
      if (b[i]) p = p ^ x;
      x = xtime(x);
    end
    return p;
  endfunction

  function automatic logic [7:0] sbox(input logic [7:0] a);
    logic [7:0] x2, x3, x12, x15, x240, inv, s;
    x2   = gmul(a, a);
    x3   = gmul(x2, a);
    x12  = gmul(gmul(x3, x3), gmul(x3, x3));        // x^12
    x15  = gmul(x12, x3);                           // x^15
    x240 = gmul(x15, x15);                          // x^30
    x240 = gmul(x240, x240);                        // x^60
    x240 = gmul(x240, x240);                        // x^120
    x240 = gmul(x240, x240);                        // x^240
    inv  = gmul(gmul(x240, x12), x2);               // x^254 = inverse (0 -> 0)
    s    = inv ^ {inv[6:0], inv[7]} ^ {inv[5:0], inv[7:6]}
               ^ {inv[4:0], inv[7:5]} ^ {inv[3:0], inv[7:4]} ^ 8'h63;
    return s;
  endfunction

  // byte i of a 128-bit word: i = 0 is bits [127:120]; byte i sits at
  // row i%4, column i/4 of the AES state
  function automatic logic [7:0] byte_of(input logic [127:0] w, input int i);
    return w[127-8*i -: 8];
  endfunction

  function automatic logic [127:0] round_fn(input logic [127:0] st, input logic [127:0] rk,
                                             input logic last);
    logic [127:0] sr;
    logic [127:0] mc;
    // SubBytes + ShiftRows: row r rotates left by r columns
    for (int c = 0; c < 4; c++)
      for (int r = 0; r < 4; r++)
        sr[127-8*(4*c+r) -: 8] = sbox(byte_of(st, 4*((c + r) % 4) + r));
    // MixColumns
    for (int c = 0; c < 4; c++) begin
      logic [7:0] a0, a1, a2, a3;
      a0 = byte_of(sr, 4*c);   a1 = byte_of(sr, 4*c+1);
      a2 = byte_of(sr, 4*c+2); a3 = byte_of(sr, 4*c+3);
      mc[127-8*(4*c)   -: 8] = xtime(a0) ^ (xtime(a1) ^ a1) ^ a2 ^ a3;
      mc[127-8*(4*c+1) -: 8] = a0 ^ xtime(a1) ^ (xtime(a2) ^ a2) ^ a3;
      mc[127-8*(4*c+2) -: 8] = a0 ^ a1 ^ xtime(a2) ^ (xtime(a3) ^ a3);
      mc[127-8*(4*c+3) -: 8] = (xtime(a0) ^ a0) ^ a1 ^ a2 ^ xtime(a3);
    end
    return (last ? sr : mc) ^ rk;
  endfunction

  function automatic logic [127:0] next_key(input logic [127:0] k, input logic [7:0] rcon);
    logic [31:0] w0, w1, w2, w3, t;
    {w0, w1, w2, w3} = k;
    t  = {sbox(w3[23:16]) ^ rcon, sbox(w3[15:8]), sbox(w3[7:0]), sbox(w3[31:24])};
    w0 = w0 ^ t;
    w1 = w1 ^ w0;
    w2 = w2 ^ w1;
    w3 = w3 ^ w2;
    return {w0, w1, w2, w3};
  endfunction

  logic [127:0] state_q, rk_q, rk_next;
  logic [7:0]   rcon_q;
  logic [3:0]   round_q;

  assign rk_next = next_key(rk_q, rcon_q);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= '0;
      rk_q    <= '0;
      rcon_q  <= 8'h01;
      round_q <= '0;
      busy    <= 1'b0;
      done    <= 1'b0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          state_q <= din ^ key;
          rk_q    <= key;
          rcon_q  <= 8'h01;
          round_q <= 4'd1;
          busy    <= 1'b1;
        end
      end else begin
        state_q <= round_fn(state_q, rk_next, round_q == 4'd10);
        rk_q    <= rk_next;
        rcon_q  <= xtime(rcon_q);
        round_q <= round_q + 4'd1;
        if (round_q == 4'd10) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

  assign dout = state_q;

endmodule
