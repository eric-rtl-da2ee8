// sha256_ref_pkg: reference models used by the testbenches.
//
// sha256_bytes_le() is a plain, whole-message SHA-256 (FIPS 180-4) written
// independently of the RTL: it pads the message in a queue and expands the
// full 64-word schedule per block. The message is a list of 32-bit
// little-endian program words, hashed as bytes in memory order, as the
// Signature Generator does.
// kmu_ref() restates the Key Management Unit function, and
// arbiter_response() restates the arbiter PUF delay model, so that the
// testbenches can work out expected keys without the RTL.
// rvc_package() builds a partially encrypted package for code with 16-bit
// compressed instructions, starting from a random list of 16- and 32-bit
// instructions rather than from words, so it does not share the unit's
// word-level boundary tracking.
package sha256_ref_pkg;

  function automatic logic [31:0] ror(logic [31:0] x, int n);
    return (x >> n) | (x << (32 - n));
  endfunction

  function automatic logic [255:0] sha256_be(logic [31:0] msg[$]);
    logic [31:0] k[64] = '{
      32'h428a2f98, 32'h71374491, 32'hb5c0fbcf, 32'he9b5dba5, 32'h3956c25b, 32'h59f111f1, 32'h923f82a4, 32'hab1c5ed5,
      32'hd807aa98, 32'h12835b01, 32'h243185be, 32'h550c7dc3, 32'h72be5d74, 32'h80deb1fe, 32'h9bdc06a7, 32'hc19bf174,
      32'he49b69c1, 32'hefbe4786, 32'h0fc19dc6, 32'h240ca1cc, 32'h2de92c6f, 32'h4a7484aa, 32'h5cb0a9dc, 32'h76f988da,
      32'h983e5152, 32'ha831c66d, 32'hb00327c8, 32'hbf597fc7, 32'hc6e00bf3, 32'hd5a79147, 32'h06ca6351, 32'h14292967,
      32'h27b70a85, 32'h2e1b2138, 32'h4d2c6dfc, 32'h53380d13, 32'h650a7354, 32'h766a0abb, 32'h81c2c92e, 32'h92722c85,
      32'ha2bfe8a1, 32'ha81a664b, 32'hc24b8b70, 32'hc76c51a3, 32'hd192e819, 32'hd6990624, 32'hf40e3585, 32'h106aa070,
      32'h19a4c116, 32'h1e376c08, 32'h2748774c, 32'h34b0bcb5, 32'h391c0cb3, 32'h4ed8aa4a, 32'h5b9cca4f, 32'h682e6ff3,
      32'h748f82ee, 32'h78a5636f, 32'h84c87814, 32'h8cc70208, 32'h90befffa, 32'ha4506ceb, 32'hbef9a3f7, 32'hc67178f2};
    logic [31:0] hh[8] = '{32'h6a09e667, 32'hbb67ae85, 32'h3c6ef372, 32'ha54ff53a,
                           32'h510e527f, 32'h9b05688c, 32'h1f83d9ab, 32'h5be0cd19};
    logic [31:0] m[$];
    logic [31:0] w[64];
    logic [31:0] va[8];
    logic [31:0] s0, s1, t1, t2;
    logic [63:0] nbits;
    nbits = 64'(msg.size()) * 64'd32;
    m = msg;
    m.push_back(32'h8000_0000);
    while ((m.size() % 16) != 14) m.push_back(32'h0);
    m.push_back(nbits[63:32]);
    m.push_back(nbits[31:0]);
    for (int blkn = 0; blkn < m.size() / 16; blkn++) begin
      for (int t = 0; t < 64; t++) begin
        if (t < 16) w[t] = m[16*blkn + t];
        else begin
          s0 = ror(w[t-15], 7) ^ ror(w[t-15], 18) ^ (w[t-15] >> 3);
          s1 = ror(w[t-2], 17) ^ ror(w[t-2], 19) ^ (w[t-2] >> 10);
          w[t] = w[t-16] + s0 + w[t-7] + s1;
        end
      end
      va = hh;
      for (int t = 0; t < 64; t++) begin
        s1 = ror(va[4], 6) ^ ror(va[4], 11) ^ ror(va[4], 25);
        t1 = va[7] + s1 + ((va[4] & va[5]) ^ (~va[4] & va[6])) + k[t] + w[t];
        s0 = ror(va[0], 2) ^ ror(va[0], 13) ^ ror(va[0], 22);
        t2 = s0 + ((va[0] & va[1]) ^ (va[0] & va[2]) ^ (va[1] & va[2]));
        va[7] = va[6]; va[6] = va[5]; va[5] = va[4]; va[4] = va[3] + t1;
        va[3] = va[2]; va[2] = va[1]; va[1] = va[0]; va[0] = t1 + t2;
      end
      for (int i = 0; i < 8; i++) hh[i] = hh[i] + va[i];
    end
    return {hh[0], hh[1], hh[2], hh[3], hh[4], hh[5], hh[6], hh[7]};
  endfunction

  function automatic logic [31:0] bswap(logic [31:0] x);
    return {x[7:0], x[15:8], x[23:16], x[31:24]};
  endfunction

  // SHA-256 of little-endian words taken as bytes in memory order.
  function automatic logic [255:0] sha256_bytes_le(logic [31:0] words[$]);
    logic [31:0] be[$];
    foreach (words[i]) be.push_back(bswap(words[i]));
    return sha256_be(be);
  endfunction

  function automatic logic [31:0] kmu_ref(logic [31:0] puf_key, logic [31:0] cfg);
    logic [31:0] x;
    x = puf_key ^ cfg;
    x ^= x >> 16;  x *= 32'h85ebca6b;
    x ^= x >> 13;  x *= 32'hc2b2ae35;
    x ^= x >> 16;
    return x;
  endfunction

  // Arbiter PUF delay model: nominal 1000 ps per multiplexer plus an offset
  // of 0..63 ps from a hash of (seed, stage, multiplexer, selected input).
  function automatic int unsigned puf_delay(logic [31:0] seed, int stage, int mux, int sel);
    logic [31:0] h;
    h = seed ^ (32'(stage) * 32'h9e3779b9) ^ (32'(mux) << 20) ^ (32'(sel) << 24);
    return 1000 + (kmu_ref(h, 32'h0) & 32'h3f);
  endfunction

  function automatic logic arbiter_response(logic [31:0] seed, int stages, logic [31:0] c);
    int unsigned top, bot, nt, nb;
    top = 0; bot = 0;
    for (int i = 0; i < stages; i++) begin
      if (c[i]) begin nt = bot + puf_delay(seed, i, 0, 1); nb = top + puf_delay(seed, i, 1, 1); end
      else      begin nt = top + puf_delay(seed, i, 0, 0); nb = bot + puf_delay(seed, i, 1, 0); end
      top = nt; bot = nb;
    end
    return top < bot;
  endfunction

  // Random program of n_words words made of 16/32-bit instructions. Each
  // instruction is encrypted with probability pct/100: every parcel of it is
  // XORed with the masked key half of its position in the word (low parcel
  // km[15:0], high parcel km[31:16]). One map word, one bit per parcel, goes
  // before every 16 program words; bits of second halves are random, since
  // the engine must ignore them. plain gets the decrypted words.
  function automatic void rvc_package(input logic [31:0] km, input int n_words, input int pct,
                                      ref logic [31:0] plain[$], ref logic [31:0] pkg[$]);
    logic [15:0] par[$];
    bit          enc[$], start[$];
    int          np;
    logic [31:0] map, w, e;
    np = 2 * n_words;
    while (par.size() < np) begin
      bit          ie;
      logic [15:0] p0;
      ie = ($urandom % 100) < pct;
      p0 = 16'($urandom);
      if (par.size() + 1 < np && ($urandom % 2)) begin
        p0[1:0] = 2'b11;                      // 32-bit instruction
        par.push_back(p0);          enc.push_back(ie); start.push_back(1);
        par.push_back(16'($urandom)); enc.push_back(ie); start.push_back(0);
      end else begin
        if (p0[1:0] == 2'b11) p0[1:0] = 2'($urandom % 3);  // 16-bit instruction
        par.push_back(p0);          enc.push_back(ie); start.push_back(1);
      end
    end
    for (int i = 0; i < n_words; i++) begin
      if (i % 16 == 0) begin
        map = $urandom;
        for (int j = 0; j < 32 && 32 * (i / 16) + j < np; j++)
          if (start[32 * (i / 16) + j]) map[j] = enc[32 * (i / 16) + j];
        pkg.push_back(map);
      end
      w = {par[2*i+1], par[2*i]};
      e = {enc[2*i+1] ? km[31:16] : 16'h0, enc[2*i] ? km[15:0] : 16'h0};
      plain.push_back(w);
      pkg.push_back(w ^ e);
    end
  endfunction

endpackage
