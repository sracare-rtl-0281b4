// sha_ref_pkg: behavioural reference SHA-256 and HMAC-SHA256 used by the
// testbenches to work out expected digests independently of the RTL.
// Written straight from FIPS 180-4 / RFC 2104 with byte queues.
// The algorithms follow the standards the design names (SHA-256, HMAC);
// the queue-based coding is this testbench's own.
package sha_ref_pkg;
  typedef byte unsigned bq_t[$];

  function automatic logic [31:0] rr(logic [31:0] x, int n);
    return (x >> n) | (x << (32 - n));
  endfunction

  function automatic logic [31:0] kc(int i);
    logic [31:0] k [64] = '{
      32'h428a2f98, 32'h71374491, 32'hb5c0fbcf, 32'he9b5dba5, 32'h3956c25b, 32'h59f111f1, 32'h923f82a4, 32'hab1c5ed5,
      32'hd807aa98, 32'h12835b01, 32'h243185be, 32'h550c7dc3, 32'h72be5d74, 32'h80deb1fe, 32'h9bdc06a7, 32'hc19bf174,
      32'he49b69c1, 32'hefbe4786, 32'h0fc19dc6, 32'h240ca1cc, 32'h2de92c6f, 32'h4a7484aa, 32'h5cb0a9dc, 32'h76f988da,
      32'h983e5152, 32'ha831c66d, 32'hb00327c8, 32'hbf597fc7, 32'hc6e00bf3, 32'hd5a79147, 32'h06ca6351, 32'h14292967,
      32'h27b70a85, 32'h2e1b2138, 32'h4d2c6dfc, 32'h53380d13, 32'h650a7354, 32'h766a0abb, 32'h81c2c92e, 32'h92722c85,
      32'ha2bfe8a1, 32'ha81a664b, 32'hc24b8b70, 32'hc76c51a3, 32'hd192e819, 32'hd6990624, 32'hf40e3585, 32'h106aa070,
      32'h19a4c116, 32'h1e376c08, 32'h2748774c, 32'h34b0bcb5, 32'h391c0cb3, 32'h4ed8aa4a, 32'h5b9cca4f, 32'h682e6ff3,
      32'h748f82ee, 32'h78a5636f, 32'h84c87814, 32'h8cc70208, 32'h90befffa, 32'ha4506ceb, 32'hbef9a3f7, 32'hc67178f2};
    return k[i];
  endfunction

  // One compression on a 64-byte block starting at m[off]
  function automatic void compress(ref logic [31:0] hs[8], input bq_t m, input int off);
    logic [31:0] w[64];
    logic [31:0] a, b, c, d, e, f, g, h, t1, t2;
    for (int i = 0; i < 16; i++)
      w[i] = {m[off+4*i], m[off+4*i+1], m[off+4*i+2], m[off+4*i+3]};
    for (int i = 16; i < 64; i++)
      w[i] = (rr(w[i-2],17) ^ rr(w[i-2],19) ^ (w[i-2] >> 10)) + w[i-7] +
             (rr(w[i-15],7) ^ rr(w[i-15],18) ^ (w[i-15] >> 3)) + w[i-16];
    {a,b,c,d,e,f,g,h} = {hs[0],hs[1],hs[2],hs[3],hs[4],hs[5],hs[6],hs[7]};
    for (int i = 0; i < 64; i++) begin
      t1 = h + (rr(e,6) ^ rr(e,11) ^ rr(e,25)) + ((e & f) ^ (~e & g)) + kc(i) + w[i];
      t2 = (rr(a,2) ^ rr(a,13) ^ rr(a,22)) + ((a & b) ^ (a & c) ^ (b & c));
      h = g; g = f; f = e; e = d + t1; d = c; c = b; b = a; a = t1 + t2;
    end
    hs[0] += a; hs[1] += b; hs[2] += c; hs[3] += d;
    hs[4] += e; hs[5] += f; hs[6] += g; hs[7] += h;
  endfunction

  function automatic logic [255:0] sha256(bq_t msg);
    logic [31:0] hs[8] = '{32'h6a09e667, 32'hbb67ae85, 32'h3c6ef372, 32'ha54ff53a,
                           32'h510e527f, 32'h9b05688c, 32'h1f83d9ab, 32'h5be0cd19};
    bq_t m = msg;
    longint unsigned nb = 64'(msg.size()) * 8;
    m.push_back(8'h80);
    while ((m.size() % 64) != 56) m.push_back(8'h00);
    for (int i = 7; i >= 0; i--) m.push_back(byte'(nb >> (8*i)));
    for (int off = 0; off < m.size(); off += 64) compress(hs, m, off);
    return {hs[0],hs[1],hs[2],hs[3],hs[4],hs[5],hs[6],hs[7]};
  endfunction

  function automatic bq_t to_bytes(logic [255:0] v);
    bq_t q;
    for (int i = 31; i >= 0; i--) q.push_back(v[8*i +: 8]);
    return q;
  endfunction

  function automatic logic [255:0] hmac(logic [255:0] key, bq_t msg);
    bq_t ik, ok;
    for (int i = 0; i < 64; i++) begin
      byte unsigned kb = (i < 32) ? key[255-8*i -: 8] : 8'h00;
      ik.push_back(kb ^ 8'h36);
      ok.push_back(kb ^ 8'h5c);
    end
    foreach (msg[i]) ik.push_back(msg[i]);
    ok = {ok, to_bytes(sha256(ik))};
    return sha256(ok);
  endfunction
endpackage
