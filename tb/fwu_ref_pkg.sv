// fwu_ref_pkg: reference models used by the testbenches.
//
// Plain SystemVerilog functions, written independently of the RTL, for SHA-256 over
// a byte string, SIMON 64/128 encryption and decryption, and the delay-race model of
// the differential public PUF (the computation the public model repository runs).
// The host model of the end-to-end testbenches builds requests and packages with
// them; the unit testbenches compare the RTL against them and against published
// test vectors.
package fwu_ref_pkg;

  typedef byte unsigned bytes_t[$];

  // ---------------- SHA-256 ----------------
  function automatic logic [31:0] r32(input logic [31:0] x, input int n);
    return (x >> n) | (x << (32 - n));
  endfunction

  function automatic logic [255:0] sha256(input bytes_t msg);
    logic [31:0] k[64];
    logic [31:0] hh[8];
    logic [31:0] w[64];
    logic [31:0] a, b, c, d, e, f, g, h, s0, s1, t1, t2;
    bytes_t m;
    longint unsigned bitlen;
    // round constants: fractional parts of cube roots of the first 64 primes
    k = '{32'h428a2f98,32'h71374491,32'hb5c0fbcf,32'he9b5dba5,32'h3956c25b,32'h59f111f1,32'h923f82a4,32'hab1c5ed5,
          32'hd807aa98,32'h12835b01,32'h243185be,32'h550c7dc3,32'h72be5d74,32'h80deb1fe,32'h9bdc06a7,32'hc19bf174,
          32'he49b69c1,32'hefbe4786,32'h0fc19dc6,32'h240ca1cc,32'h2de92c6f,32'h4a7484aa,32'h5cb0a9dc,32'h76f988da,
          32'h983e5152,32'ha831c66d,32'hb00327c8,32'hbf597fc7,32'hc6e00bf3,32'hd5a79147,32'h06ca6351,32'h14292967,
          32'h27b70a85,32'h2e1b2138,32'h4d2c6dfc,32'h53380d13,32'h650a7354,32'h766a0abb,32'h81c2c92e,32'h92722c85,
          32'ha2bfe8a1,32'ha81a664b,32'hc24b8b70,32'hc76c51a3,32'hd192e819,32'hd6990624,32'hf40e3585,32'h106aa070,
          32'h19a4c116,32'h1e376c08,32'h2748774c,32'h34b0bcb5,32'h391c0cb3,32'h4ed8aa4a,32'h5b9cca4f,32'h682e6ff3,
          32'h748f82ee,32'h78a5636f,32'h84c87814,32'h8cc70208,32'h90befffa,32'ha4506ceb,32'hbef9a3f7,32'hc67178f2};
    hh = '{32'h6a09e667,32'hbb67ae85,32'h3c6ef372,32'ha54ff53a,32'h510e527f,32'h9b05688c,32'h1f83d9ab,32'h5be0cd19};
    m = msg;
    bitlen = 64'(msg.size()) * 8;
    m.push_back(8'h80);
    while ((m.size() % 64) != 56) m.push_back(8'h00);
    for (int i = 7; i >= 0; i--) m.push_back(8'(bitlen >> (8*i)));
    for (int blk = 0; blk < m.size() / 64; blk++) begin
      for (int t = 0; t < 16; t++)
        w[t] = {m[blk*64+4*t], m[blk*64+4*t+1], m[blk*64+4*t+2], m[blk*64+4*t+3]};
      for (int t = 16; t < 64; t++) begin
        s0 = r32(w[t-15], 7) ^ r32(w[t-15], 18) ^ (w[t-15] >> 3);
        s1 = r32(w[t-2], 17) ^ r32(w[t-2], 19) ^ (w[t-2] >> 10);
        w[t] = w[t-16] + s0 + w[t-7] + s1;
      end
      {a, b, c, d, e, f, g, h} = {hh[0], hh[1], hh[2], hh[3], hh[4], hh[5], hh[6], hh[7]};
      for (int t = 0; t < 64; t++) begin
        t1 = h + (r32(e, 6) ^ r32(e, 11) ^ r32(e, 25)) + ((e & f) ^ (~e & g)) + k[t] + w[t];
        t2 = (r32(a, 2) ^ r32(a, 13) ^ r32(a, 22)) + ((a & b) ^ (a & c) ^ (b & c));
        h = g; g = f; f = e; e = d + t1; d = c; c = b; b = a; a = t1 + t2;
      end
      hh[0] += a; hh[1] += b; hh[2] += c; hh[3] += d;
      hh[4] += e; hh[5] += f; hh[6] += g; hh[7] += h;
    end
    return {hh[0], hh[1], hh[2], hh[3], hh[4], hh[5], hh[6], hh[7]};
  endfunction

  function automatic void put(ref bytes_t q, input logic [1023:0] v, input int nbytes);
    for (int i = nbytes - 1; i >= 0; i--) q.push_back(v[8*i +: 8]);
  endfunction

  function automatic logic [255:0] sha256_key(input logic [127:0] key);
    bytes_t q;
    put(q, 1024'(key), 16);
    return sha256(q);
  endfunction

  // ---------------- SIMON 64/128 ----------------
  function automatic logic [31:0] l32(input logic [31:0] x, input int n);
    return (x << n) | (x >> (32 - n));
  endfunction

  function automatic void simon_keys(input logic [127:0] key, output logic [31:0] rk[44]);
    logic [61:0] z3 = 62'b11011011101011000110010111100000010010001010011100110100001111;
    logic [31:0] tmp;
    for (int i = 0; i < 4; i++) rk[i] = key[32*i +: 32];
    for (int i = 4; i < 44; i++) begin
      tmp = r32(rk[i-1], 3) ^ rk[i-3];
      tmp = tmp ^ r32(tmp, 1);
      // z3 written left to right as in the cipher specification: bit j is z3[61-j]
      rk[i] = ~rk[i-4] ^ tmp ^ {31'b0, z3[61 - ((i-4) % 62)]} ^ 32'd3;
    end
  endfunction

  function automatic logic [63:0] simon_enc(input logic [127:0] key, input logic [63:0] pt);
    logic [31:0] rk[44];
    logic [31:0] x, y, t;
    simon_keys(key, rk);
    {x, y} = pt;
    for (int i = 0; i < 44; i++) begin
      t = x;
      x = y ^ ((l32(x, 1) & l32(x, 8)) ^ l32(x, 2)) ^ rk[i];
      y = t;
    end
    return {x, y};
  endfunction

  function automatic logic [63:0] simon_dec(input logic [127:0] key, input logic [63:0] ct);
    logic [31:0] rk[44];
    logic [31:0] x, y, t;
    simon_keys(key, rk);
    {x, y} = ct;
    for (int i = 43; i >= 0; i--) begin
      t = y;
      y = x ^ ((l32(y, 1) & l32(y, 8)) ^ l32(y, 2)) ^ rk[i];
      x = t;
    end
    return {x, y};
  endfunction

  // ---------------- dPPUF delay-race model ----------------
  function automatic int unsigned ppuf_delay(input int unsigned seed, input int unsigned side,
                                             input int unsigned layer, input int unsigned idx);
    int unsigned h;
    h = seed ^ (side * 32'h9e3779b9) ^ (layer * 32'h85ebca6b) ^ (idx * 32'hc2b2ae35);
    h ^= h >> 15; h *= 32'h2c1b3c6d; h ^= h >> 12; h *= 32'h297a2d39; h ^= h >> 15;
    return 8 + (h & 15);
  endfunction

  function automatic logic [255:0] ppuf(input int unsigned seed, input logic [255:0] ch,
                                        input int layers = 6);
    int unsigned t[2][256];
    int unsigned nt[256];
    logic [255:0] v[2];
    logic [255:0] nv;
    logic [255:0] r;
    for (int s = 0; s < 2; s++) begin
      v[s] = ch;
      for (int i = 0; i < 256; i++) t[s][i] = ch[i];
      for (int l = 0; l < layers; l++) begin
        for (int i = 0; i < 256; i++) begin
          int j;
          int unsigned d, ta, tb;
          j = (i + (1 << (l % 8))) % 256;
          ta = t[s][i]; tb = t[s][j];
          d = ppuf_delay(seed, s, l, i);
          if (l % 2 == 0) begin
            nv[i] = v[s][i] ^ v[s][j];
            nt[i] = ((ta > tb) ? ta : tb) + d;
          end else begin
            nv[i] = !(v[s][i] && v[s][j]);
            case ({v[s][i], v[s][j]})
              2'b00:   nt[i] = ((ta < tb) ? ta : tb) + d;
              2'b01:   nt[i] = ta + d;
              2'b10:   nt[i] = tb + d;
              default: nt[i] = ((ta > tb) ? ta : tb) + d;
            endcase
          end
          nt[i] &= 255;
        end
        v[s] = nv;
        for (int i = 0; i < 256; i++) t[s][i] = nt[i];
      end
    end
    for (int i = 0; i < 256; i++)
      r[i] = (t[0][i] < t[1][i]) ? 1'b1 : (t[0][i] > t[1][i]) ? 1'b0 : v[0][i];
    return r;
  endfunction

endpackage
