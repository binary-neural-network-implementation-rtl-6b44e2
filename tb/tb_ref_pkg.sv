// tb_ref_pkg: reference model used by the testbenches.
//
// Recomputes, without using the design's code, the ROM contents (the same
// 32-bit xor-shift-multiply hash, written here with 64-bit arithmetic) and
// the whole BNN inference of one image: for each layer and neuron
// z = 2*matches - N, activation = (z >= threshold) in the hidden layers, raw
// z in the output layer, and the index of the first largest output sum.
package tb_ref_pkg;

  localparam int R_IN = 784, R_H1 = 128, R_H2 = 64, R_OUT = 10;

  function automatic longint unsigned r_mix(input longint unsigned v);
    longint unsigned x;
    x = v & 64'hffff_ffff;
    x = x ^ (x >> 16);
    x = (x * 64'h7feb352d) & 64'hffff_ffff;
    x = x ^ (x >> 15);
    x = (x * 64'h846ca68b) & 64'hffff_ffff;
    x = x ^ (x >> 16);
    return x;
  endfunction

  // Weight of input idx: bit idx%16 of (low half XOR high half) of the hash
  // of (layer, neuron, idx/16).
  function automatic bit r_weight(input int layer, input int neuron, input int idx);
    longint unsigned h;
    h = r_mix(longint'(layer) * 16777216 + longint'(neuron) * 4096 + longint'(idx) / 16);
    return bit'(((h ^ (h >> 16)) >> (longint'(idx) % 16)) & 1);
  endfunction

  function automatic int r_threshold(input int layer, input int neuron);
    return int'(r_mix(64'h5a00_0000 + longint'(layer) * 65536 + longint'(neuron)) % 33) - 16;
  endfunction

  // Pixel idx: bit idx%16 of (low half AND high half) of the hash of
  // (image, idx/16).
  function automatic bit r_pixel(input int image, input int idx);
    longint unsigned h;
    h = r_mix(64'hc300_0000 + longint'(image) * 4096 + longint'(idx) / 16);
    return bit'(((h & (h >> 16)) >> (longint'(idx) % 16)) & 1);
  endfunction

  // Full inference of one image. Returns the class; fills the intermediates.
  function automatic int r_infer(input int image,
                                 output bit a1 [R_H1], output bit a2 [R_H2],
                                 output int s [R_OUT], output int ties);
    bit x [R_IN];
    int m, best;
    for (int i = 0; i < R_IN; i++) x[i] = r_pixel(image, i);
    for (int j = 0; j < R_H1; j++) begin
      m = 0;
      for (int i = 0; i < R_IN; i++) m += (x[i] == r_weight(1, j, i)) ? 1 : 0;
      a1[j] = (2 * m - R_IN) >= r_threshold(1, j);
    end
    for (int j = 0; j < R_H2; j++) begin
      m = 0;
      for (int i = 0; i < R_H1; i++) m += (a1[i] == r_weight(2, j, i)) ? 1 : 0;
      a2[j] = (2 * m - R_H1) >= r_threshold(2, j);
    end
    for (int j = 0; j < R_OUT; j++) begin
      m = 0;
      for (int i = 0; i < R_H2; i++) m += (a2[i] == r_weight(3, j, i)) ? 1 : 0;
      s[j] = 2 * m - R_H2;
    end
    best = 0;
    ties = 0;
    for (int j = 1; j < R_OUT; j++) begin
      if (s[j] > s[best]) best = j;
    end
    for (int j = 0; j < R_OUT; j++) if (j != best && s[j] == s[best]) ties++;
    return best;
  endfunction

  // Cycles from the first clock edge after reset to the first cycle with
  // done high: N+2 cycles per neuron group, then 11 cycles of classification.
  function automatic int r_latency(input int par);
    int g1, g2, g3;
    g1 = (R_H1 + par - 1) / par;
    g2 = (R_H2 + par - 1) / par;
    g3 = (R_OUT + par - 1) / par;
    return g1 * (R_IN + 2) + g2 * (R_H1 + 2) + g3 * (R_H2 + 2) + R_OUT + 1;
  endfunction

endpackage
