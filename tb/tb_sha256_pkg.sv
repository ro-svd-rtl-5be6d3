// tb_sha256_pkg -- reference SHA-256 for the testbenches.
//
// sha256_bits() hashes a message given as a queue of bits (first element is
// the most significant bit of the first byte), straight from FIPS 180-4:
// pad with a 1, zeros to 448 mod 512, the 64-bit length, then compress each
// block. Written independently of the RTL core so the two can be compared.
package tb_sha256_pkg;

  function automatic logic [31:0] rr(logic [31:0] x, int n);
    return (x >> n) | (x << (32 - n));
  endfunction

  function automatic logic [255:0] sha256_bits(bit msg[$]);
    logic [31:0] K [64] = '{
      32'h428a2f98, 32'h71374491, 32'hb5c0fbcf, 32'he9b5dba5, 32'h3956c25b, 32'h59f111f1, 32'h923f82a4, 32'hab1c5ed5,
      32'hd807aa98, 32'h12835b01, 32'h243185be, 32'h550c7dc3, 32'h72be5d74, 32'h80deb1fe, 32'h9bdc06a7, 32'hc19bf174,
      32'he49b69c1, 32'hefbe4786, 32'h0fc19dc6, 32'h240ca1cc, 32'h2de92c6f, 32'h4a7484aa, 32'h5cb0a9dc, 32'h76f988da,
      32'h983e5152, 32'ha831c66d, 32'hb00327c8, 32'hbf597fc7, 32'hc6e00bf3, 32'hd5a79147, 32'h06ca6351, 32'h14292967,
      32'h27b70a85, 32'h2e1b2138, 32'h4d2c6dfc, 32'h53380d13, 32'h650a7354, 32'h766a0abb, 32'h81c2c92e, 32'h92722c85,
      32'ha2bfe8a1, 32'ha81a664b, 32'hc24b8b70, 32'hc76c51a3, 32'hd192e819, 32'hd6990624, 32'hf40e3585, 32'h106aa070,
      32'h19a4c116, 32'h1e376c08, 32'h2748774c, 32'h34b0bcb5, 32'h391c0cb3, 32'h4ed8aa4a, 32'h5b9cca4f, 32'h682e6ff3,
      32'h748f82ee, 32'h78a5636f, 32'h84c87814, 32'h8cc70208, 32'h90befffa, 32'ha4506ceb, 32'hbef9a3f7, 32'hc67178f2};
    logic [31:0] H [8] = '{32'h6a09e667, 32'hbb67ae85, 32'h3c6ef372, 32'ha54ff53a,
                           32'h510e527f, 32'h9b05688c, 32'h1f83d9ab, 32'h5be0cd19};
    bit m[$];
    longint unsigned len;
    logic [31:0] W [64];
    logic [31:0] a, b, c, d, e, f, g, h, t1, t2;
    logic [255:0] out;
    m = msg;
    len = m.size();
    m.push_back(1'b1);
    while (m.size() % 512 != 448) m.push_back(1'b0);
    for (int i = 63; i >= 0; i--) m.push_back(len[i]);
    for (int blk = 0; blk < m.size() / 512; blk++) begin
      for (int t = 0; t < 16; t++) begin
        W[t] = '0;
        for (int k = 0; k < 32; k++) W[t][31-k] = m[blk*512 + t*32 + k];
      end
      for (int t = 16; t < 64; t++)
        W[t] = (rr(W[t-2], 17) ^ rr(W[t-2], 19) ^ (W[t-2] >> 10)) + W[t-7]
             + (rr(W[t-15], 7) ^ rr(W[t-15], 18) ^ (W[t-15] >> 3)) + W[t-16];
      {a, b, c, d, e, f, g, h} = {H[0], H[1], H[2], H[3], H[4], H[5], H[6], H[7]};
      for (int t = 0; t < 64; t++) begin
        t1 = h + (rr(e, 6) ^ rr(e, 11) ^ rr(e, 25)) + ((e & f) ^ (~e & g)) + K[t] + W[t];
        t2 = (rr(a, 2) ^ rr(a, 13) ^ rr(a, 22)) + ((a & b) ^ (a & c) ^ (b & c));
        h = g; g = f; f = e; e = d + t1; d = c; c = b; b = a; a = t1 + t2;
      end
      H[0] += a; H[1] += b; H[2] += c; H[3] += d; H[4] += e; H[5] += f; H[6] += g; H[7] += h;
    end
    out = {H[0], H[1], H[2], H[3], H[4], H[5], H[6], H[7]};
    return out;
  endfunction

endpackage
