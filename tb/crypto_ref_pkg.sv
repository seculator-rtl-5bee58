// crypto_ref_pkg: reference models for the testbenches, written as plain
// software-style functions, separate from the RTL: SHA-256 over a byte array,
// AES-128 encryption with a precomputed S-box table, and the Seculator block
// MAC and counter-mode pad built from them.
//
// The algorithms are the published AES-128 and SHA-256 standards; the MAC message
// layout and the counter layout follow this design's own choices, as in the RTL.
package crypto_ref_pkg;

  typedef byte unsigned bytes_t[];

  function automatic logic [31:0] ror(logic [31:0] x, int n);
    return (x >> n) | (x << (32 - n));
  endfunction

  function automatic logic [255:0] sha256(bytes_t msg);
    logic [31:0] k[64] = '{
      'h428a2f98,'h71374491,'hb5c0fbcf,'he9b5dba5,'h3956c25b,'h59f111f1,'h923f82a4,'hab1c5ed5,
      'hd807aa98,'h12835b01,'h243185be,'h550c7dc3,'h72be5d74,'h80deb1fe,'h9bdc06a7,'hc19bf174,
      'he49b69c1,'hefbe4786,'h0fc19dc6,'h240ca1cc,'h2de92c6f,'h4a7484aa,'h5cb0a9dc,'h76f988da,
      'h983e5152,'ha831c66d,'hb00327c8,'hbf597fc7,'hc6e00bf3,'hd5a79147,'h06ca6351,'h14292967,
      'h27b70a85,'h2e1b2138,'h4d2c6dfc,'h53380d13,'h650a7354,'h766a0abb,'h81c2c92e,'h92722c85,
      'ha2bfe8a1,'ha81a664b,'hc24b8b70,'hc76c51a3,'hd192e819,'hd6990624,'hf40e3585,'h106aa070,
      'h19a4c116,'h1e376c08,'h2748774c,'h34b0bcb5,'h391c0cb3,'h4ed8aa4a,'h5b9cca4f,'h682e6ff3,
      'h748f82ee,'h78a5636f,'h84c87814,'h8cc70208,'h90befffa,'ha4506ceb,'hbef9a3f7,'hc67178f2};
    logic [31:0] hh[8] = '{'h6a09e667,'hbb67ae85,'h3c6ef372,'ha54ff53a,
                           'h510e527f,'h9b05688c,'h1f83d9ab,'h5be0cd19};
    byte unsigned m[$];
    longint unsigned bitlen = 64'(msg.size()) * 8;
    foreach (msg[i]) m.push_back(msg[i]);
    m.push_back(8'h80);
    while ((m.size() % 64) != 56) m.push_back(8'h00);
    for (int i = 7; i >= 0; i--) m.push_back(8'(bitlen >> (8*i)));
    for (int blk = 0; blk < m.size() / 64; blk++) begin
      logic [31:0] w[64];
      logic [31:0] a, b, c, d, e, f, g, h, t1, t2;
      for (int t = 0; t < 16; t++)
        w[t] = {m[blk*64+4*t], m[blk*64+4*t+1], m[blk*64+4*t+2], m[blk*64+4*t+3]};
      for (int t = 16; t < 64; t++)
        w[t] = (ror(w[t-2],17) ^ ror(w[t-2],19) ^ (w[t-2] >> 10)) + w[t-7]
             + (ror(w[t-15],7) ^ ror(w[t-15],18) ^ (w[t-15] >> 3)) + w[t-16];
      {a,b,c,d,e,f,g,h} = {hh[0],hh[1],hh[2],hh[3],hh[4],hh[5],hh[6],hh[7]};
      for (int t = 0; t < 64; t++) begin
        t1 = h + (ror(e,6) ^ ror(e,11) ^ ror(e,25)) + ((e & f) ^ (~e & g)) + k[t] + w[t];
        t2 = (ror(a,2) ^ ror(a,13) ^ ror(a,22)) + ((a & b) ^ (a & c) ^ (b & c));
        h = g; g = f; f = e; e = d + t1; d = c; c = b; b = a; a = t1 + t2;
      end
      hh[0] += a; hh[1] += b; hh[2] += c; hh[3] += d;
      hh[4] += e; hh[5] += f; hh[6] += g; hh[7] += h;
    end
    return {hh[0],hh[1],hh[2],hh[3],hh[4],hh[5],hh[6],hh[7]};
  endfunction

  // AES S-box (FIPS-197 figure 7)
  function automatic logic [7:0] sb(logic [7:0] x);
    logic [7:0] t[256] = '{
      'h63,'h7c,'h77,'h7b,'hf2,'h6b,'h6f,'hc5,'h30,'h01,'h67,'h2b,'hfe,'hd7,'hab,'h76,
      'hca,'h82,'hc9,'h7d,'hfa,'h59,'h47,'hf0,'had,'hd4,'ha2,'haf,'h9c,'ha4,'h72,'hc0,
      'hb7,'hfd,'h93,'h26,'h36,'h3f,'hf7,'hcc,'h34,'ha5,'he5,'hf1,'h71,'hd8,'h31,'h15,
      'h04,'hc7,'h23,'hc3,'h18,'h96,'h05,'h9a,'h07,'h12,'h80,'he2,'heb,'h27,'hb2,'h75,
      'h09,'h83,'h2c,'h1a,'h1b,'h6e,'h5a,'ha0,'h52,'h3b,'hd6,'hb3,'h29,'he3,'h2f,'h84,
      'h53,'hd1,'h00,'hed,'h20,'hfc,'hb1,'h5b,'h6a,'hcb,'hbe,'h39,'h4a,'h4c,'h58,'hcf,
      'hd0,'hef,'haa,'hfb,'h43,'h4d,'h33,'h85,'h45,'hf9,'h02,'h7f,'h50,'h3c,'h9f,'ha8,
      'h51,'ha3,'h40,'h8f,'h92,'h9d,'h38,'hf5,'hbc,'hb6,'hda,'h21,'h10,'hff,'hf3,'hd2,
      'hcd,'h0c,'h13,'hec,'h5f,'h97,'h44,'h17,'hc4,'ha7,'h7e,'h3d,'h64,'h5d,'h19,'h73,
      'h60,'h81,'h4f,'hdc,'h22,'h2a,'h90,'h88,'h46,'hee,'hb8,'h14,'hde,'h5e,'h0b,'hdb,
      'he0,'h32,'h3a,'h0a,'h49,'h06,'h24,'h5c,'hc2,'hd3,'hac,'h62,'h91,'h95,'he4,'h79,
      'he7,'hc8,'h37,'h6d,'h8d,'hd5,'h4e,'ha9,'h6c,'h56,'hf4,'hea,'h65,'h7a,'hae,'h08,
      'hba,'h78,'h25,'h2e,'h1c,'ha6,'hb4,'hc6,'he8,'hdd,'h74,'h1f,'h4b,'hbd,'h8b,'h8a,
      'h70,'h3e,'hb5,'h66,'h48,'h03,'hf6,'h0e,'h61,'h35,'h57,'hb9,'h86,'hc1,'h1d,'h9e,
      'he1,'hf8,'h98,'h11,'h69,'hd9,'h8e,'h94,'h9b,'h1e,'h87,'he9,'hce,'h55,'h28,'hdf,
      'h8c,'ha1,'h89,'h0d,'hbf,'he6,'h42,'h68,'h41,'h99,'h2d,'h0f,'hb0,'h54,'hbb,'h16};
    return t[x];
  endfunction

  function automatic logic [7:0] xt(logic [7:0] a);
    return {a[6:0], 1'b0} ^ (a[7] ? 8'h1b : 8'h00);
  endfunction

  function automatic logic [127:0] aes128(logic [127:0] key, logic [127:0] pt);
    logic [7:0] s[16], r[16], kk[16];
    logic [7:0] rc = 8'h01;
    for (int i = 0; i < 16; i++) begin
      kk[i] = key[127-8*i -: 8];
      s[i]  = pt[127-8*i -: 8] ^ kk[i];
    end
    for (int rnd = 1; rnd <= 10; rnd++) begin
      // key schedule
      logic [7:0] t0, t1, t2, t3;
      t0 = sb(kk[13]) ^ rc; t1 = sb(kk[14]); t2 = sb(kk[15]); t3 = sb(kk[12]);
      kk[0] ^= t0; kk[1] ^= t1; kk[2] ^= t2; kk[3] ^= t3;
      for (int i = 4; i < 16; i++) kk[i] ^= kk[i-4];
      rc = xt(rc);
      // sub bytes + shift rows
      for (int c = 0; c < 4; c++)
        for (int row = 0; row < 4; row++)
          r[4*c+row] = sb(s[4*((c+row)%4)+row]);
      if (rnd != 10)
        for (int c = 0; c < 4; c++) begin
          logic [7:0] a0, a1, a2, a3;
          a0 = r[4*c]; a1 = r[4*c+1]; a2 = r[4*c+2]; a3 = r[4*c+3];
          r[4*c]   = xt(a0) ^ xt(a1) ^ a1 ^ a2 ^ a3;
          r[4*c+1] = a0 ^ xt(a1) ^ xt(a2) ^ a2 ^ a3;
          r[4*c+2] = a0 ^ a1 ^ xt(a2) ^ xt(a3) ^ a3;
          r[4*c+3] = xt(a0) ^ a0 ^ a1 ^ a2 ^ xt(a3);
        end
      for (int i = 0; i < 16; i++) s[i] = r[i] ^ kk[i];
    end
    return {s[0],s[1],s[2],s[3],s[4],s[5],s[6],s[7],s[8],s[9],s[10],s[11],s[12],s[13],s[14],s[15]};
  endfunction

  // Seculator block MAC: SHA-256 of secret id, layer, fmap, VN, block index, data
  function automatic logic [255:0] block_mac(logic [63:0] sid, logic [15:0] lid, logic [15:0] fid,
                                             logic [31:0] vn, logic [31:0] idx, logic [511:0] data);
    logic [671:0] all = {sid, lid, fid, vn, idx, data};
    bytes_t m = new[84];
    for (int i = 0; i < 84; i++) m[i] = all[671-8*i -: 8];
    return sha256(m);
  endfunction

  // Seculator counter-mode pad of one 64-byte block (four AES engines)
  function automatic logic [511:0] block_pad(logic [63:0] sid, logic [63:0] rnd, logic [15:0] lid,
                                             logic [15:0] fid, logic [31:0] vn, logic [31:0] idx);
    logic [511:0] p;
    for (int e = 0; e < 4; e++)
      p[511-128*e -: 128] = aes128({sid, rnd}, {lid, fid, vn, idx, 30'b0, 2'(e)});
    return p;
  endfunction

endpackage
