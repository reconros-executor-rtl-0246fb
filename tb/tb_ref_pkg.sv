// tb_ref_pkg: reference models for the testbenches, written independently of
// the RTL: a direct 2-D Sobel over a whole image, a sort, and a plain
// software-style SHA-256. Data arrays are SystemVerilog dynamic arrays of
// 32-bit memory words (little-endian byte order for the hash).
package tb_ref_pkg;

  typedef logic [31:0] word_q_t [];

  // Deterministic test data: word i of a buffer with seed s.
  function automatic logic [31:0] gen_word(int unsigned s, int unsigned i);
    logic [31:0] x;
    x = 32'(i) * 32'h9E37_79B9 + 32'(s) * 32'h85EB_CA6B;
    x = x ^ (x >> 15);
    x = x * 32'h2C1B_3C6D;
    x = x ^ (x >> 12);
    return x;
  endfunction

  function automatic word_q_t sobel_ref(word_q_t img, int w, int h);
    word_q_t o;
    o = new[w * h];
    for (int r = 0; r < h; r++)
      for (int c = 0; c < w; c++) begin
        logic [31:0] v;
        v = '0;
        if (r > 0 && r < h - 1 && c > 0 && c < w - 1)
          for (int ch = 0; ch < 3; ch++) begin
            int p [3][3];
            int gx, gy, m;
            for (int dr = 0; dr < 3; dr++)
              for (int dc = 0; dc < 3; dc++)
                p[dr][dc] = int'(img[(r + dr - 1) * w + (c + dc - 1)][8*ch +: 8]);
            gx = p[0][2] + 2*p[1][2] + p[2][2] - p[0][0] - 2*p[1][0] - p[2][0];
            gy = p[2][0] + 2*p[2][1] + p[2][2] - p[0][0] - 2*p[0][1] - p[0][2];
            m  = (gx < 0 ? -gx : gx) + (gy < 0 ? -gy : gy);
            v[8*ch +: 8] = (m > 255) ? 8'hFF : 8'(m);
          end
        o[r * w + c] = v;
      end
    return o;
  endfunction

  function automatic word_q_t sort_ref(word_q_t a);
    word_q_t s;
    s = new[a.size()](a);
    s.sort();
    return s;
  endfunction

  function automatic logic [31:0] rotr(logic [31:0] x, int n);
    return (x >> n) | (x << (32 - n));
  endfunction

  // SHA-256 of the first nbytes bytes stored little-endian in mem words.
  function automatic logic [255:0] sha256_ref(word_q_t mem, int nbytes);
    logic [31:0] k [64] = '{
      32'h428a2f98, 32'h71374491, 32'hb5c0fbcf, 32'he9b5dba5, 32'h3956c25b, 32'h59f111f1, 32'h923f82a4, 32'hab1c5ed5,
      32'hd807aa98, 32'h12835b01, 32'h243185be, 32'h550c7dc3, 32'h72be5d74, 32'h80deb1fe, 32'h9bdc06a7, 32'hc19bf174,
      32'he49b69c1, 32'hefbe4786, 32'h0fc19dc6, 32'h240ca1cc, 32'h2de92c6f, 32'h4a7484aa, 32'h5cb0a9dc, 32'h76f988da,
      32'h983e5152, 32'ha831c66d, 32'hb00327c8, 32'hbf597fc7, 32'hc6e00bf3, 32'hd5a79147, 32'h06ca6351, 32'h14292967,
      32'h27b70a85, 32'h2e1b2138, 32'h4d2c6dfc, 32'h53380d13, 32'h650a7354, 32'h766a0abb, 32'h81c2c92e, 32'h92722c85,
      32'ha2bfe8a1, 32'ha81a664b, 32'hc24b8b70, 32'hc76c51a3, 32'hd192e819, 32'hd6990624, 32'hf40e3585, 32'h106aa070,
      32'h19a4c116, 32'h1e376c08, 32'h2748774c, 32'h34b0bcb5, 32'h391c0cb3, 32'h4ed8aa4a, 32'h5b9cca4f, 32'h682e6ff3,
      32'h748f82ee, 32'h78a5636f, 32'h84c87814, 32'h8cc70208, 32'h90befffa, 32'ha4506ceb, 32'hbef9a3f7, 32'hc67178f2};
    logic [31:0] hh [8] = '{32'h6a09e667, 32'hbb67ae85, 32'h3c6ef372, 32'ha54ff53a,
                            32'h510e527f, 32'h9b05688c, 32'h1f83d9ab, 32'h5be0cd19};
    longint total, nblk;
    logic [255:0] d;
    total = ((longint'(nbytes) + 9 + 63) / 64) * 64;
    nblk  = total / 64;
    for (longint b = 0; b < nblk; b++) begin
      logic [31:0] w [64];
      logic [31:0] a, bb, c, dd, e, f, g, h, t1, t2;
      for (int j = 0; j < 16; j++) begin
        logic [31:0] x;
        for (int q = 0; q < 4; q++) begin
          longint pos;
          logic [7:0] by;
          pos = b * 64 + j * 4 + q;
          if (pos < nbytes) by = mem[pos / 4][8 * (pos % 4) +: 8];
          else if (pos == nbytes) by = 8'h80;
          else if (pos >= total - 8) by = 8'((longint'(nbytes) * 8) >> (8 * (total - 1 - pos)));
          else by = 8'h00;
          x[31 - 8*q -: 8] = by;
        end
        w[j] = x;
      end
      for (int j = 16; j < 64; j++)
        w[j] = (rotr(w[j-2], 17) ^ rotr(w[j-2], 19) ^ (w[j-2] >> 10)) + w[j-7] +
               (rotr(w[j-15], 7) ^ rotr(w[j-15], 18) ^ (w[j-15] >> 3)) + w[j-16];
      a = hh[0]; bb = hh[1]; c = hh[2]; dd = hh[3]; e = hh[4]; f = hh[5]; g = hh[6]; h = hh[7];
      for (int j = 0; j < 64; j++) begin
        t1 = h + (rotr(e, 6) ^ rotr(e, 11) ^ rotr(e, 25)) + ((e & f) ^ (~e & g)) + k[j] + w[j];
        t2 = (rotr(a, 2) ^ rotr(a, 13) ^ rotr(a, 22)) + ((a & bb) ^ (a & c) ^ (bb & c));
        h = g; g = f; f = e; e = dd + t1; dd = c; c = bb; bb = a; a = t1 + t2;
      end
      hh[0] += a; hh[1] += bb; hh[2] += c; hh[3] += dd;
      hh[4] += e; hh[5] += f;  hh[6] += g; hh[7] += h;
    end
    for (int i = 0; i < 8; i++) d[255 - 32*i -: 32] = hh[i];
    return d;
  endfunction

endpackage
