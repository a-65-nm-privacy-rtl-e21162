// tb_ref_pkg: reference model of the encoder chain, written for the
// testbenches independently of the RTL.
//
// cell weight w(seed, tile, row, col): murmur-style finaliser of the mixed
//   indices, four bytes summed, minus 510
// bit-line difference dv_j = sum over powered rows of w * feature
// VGA/CDF: v = clamp(32768 + floor(dv * 2^gain / 16), 0, 65535)
// pulse width of v at full scale fs: round(v * fs / 65536)
// permutator step: p_j <- round(p_{j-1} * t_j / 64), p starts at 65535
// count h_j = pulse width of p_j at full scale 1023
package tb_ref_pkg;
  function automatic int weight(logic [31:0] seed, int tile, int row, int col);
    logic [31:0] x;
    x = seed ^ (tile * 32'h9E37_79B9) ^ (row * 32'h85EB_CA6B) ^ (col * 32'hC2B2_AE35);
    x = x ^ (x >> 16); x = x * 32'h7FEB_352D;
    x = x ^ (x >> 15); x = x * 32'h846C_A68B;
    x = x ^ (x >> 16);
    return int'(x[7:0]) + int'(x[15:8]) + int'(x[23:16]) + int'(x[31:24]) - 510;
  endfunction

  function automatic int vga(longint dv, int gain);
    longint v;
    v = 32768 + ((dv * (longint'(1) << gain)) >>> 4);
    if (v < 0) v = 0;
    if (v > 65535) v = 65535;
    return int'(v);
  endfunction

  function automatic int width(int v, int fs);
    return int'((longint'(v) * fs + 32768) / 65536);
  endfunction

  // Encodes one tile: feats[n][i] for grams n < ngram, rows i < flen.
  function automatic void encode_tile(logic [31:0] seed, int tile, int rows, int cols,
                                      int ngram, int flen, int gain,
                                      const ref int feats [8][64], ref int h [32]);
    longint p [32], nxt [32];
    for (int j = 0; j < cols; j++) p[j] = 65535;
    for (int n = 0; n < ngram; n++) begin
      for (int j = 0; j < cols; j++) begin
        longint dv;
        int t;
        dv = 0;
        for (int i = 0; i < rows && i < flen; i++) dv += longint'(weight(seed, tile, i, j)) * feats[n][i];
        t = width(vga(dv, gain), 64);
        nxt[j] = (p[(j + cols - 1) % cols] * t + 32) / 64;
      end
      for (int j = 0; j < cols; j++) p[j] = nxt[j];
    end
    for (int j = 0; j < cols; j++) h[j] = width(int'(p[j]), 1023);
  endfunction
endpackage
