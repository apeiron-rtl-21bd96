// nn_ref_pkg: reference model of the FPGA-RICH network for the testbenches.
//
// Weights are drawn from a seeded xorshift generator, so that a testbench
// and its reference agree without files. infer() computes the three layers
// with plain integer arithmetic: a neuron's value is
// (bias * 2^10 + sum x_i * w_i) arithmetically shifted right by 7 and
// wrapped to 16 bits, followed by ReLU on layers 1 and 2; the class is the
// first index of the largest layer-3 value.
package nn_ref_pkg;
  byte w1 [64][64];
  byte b1 [64];
  byte w2 [16][64];
  byte b2 [16];
  byte w3 [4][16];
  byte b3 [4];

  int unsigned rng_state = 32'h1234_5678;

  function automatic int unsigned rng();
    rng_state ^= rng_state << 13;
    rng_state ^= rng_state >> 17;
    rng_state ^= rng_state << 5;
    return rng_state;
  endfunction

  // weights in [-1, 1): any byte; biases scaled a little to keep sums lively
  function automatic void gen_weights(int unsigned seed);
    rng_state = seed | 1;
    for (int n = 0; n < 64; n++) begin
      for (int i = 0; i < 64; i++) w1[n][i] = byte'(rng());
      b1[n] = byte'(rng());
    end
    for (int n = 0; n < 16; n++) begin
      for (int i = 0; i < 64; i++) w2[n][i] = byte'(rng() % 64) - 8'sd32;
      b2[n] = byte'(rng());
    end
    for (int n = 0; n < 4; n++) begin
      for (int i = 0; i < 16; i++) w3[n][i] = byte'(rng());
      b3[n] = byte'(rng());
    end
  endfunction

  // weight at a load-port address (see nn_dense_core's address map)
  function automatic byte wt_at(int a);
    if (a < 4096) return w1[a / 64][a % 64];
    a -= 4096; if (a < 64)   return b1[a];
    a -= 64;   if (a < 1024) return w2[a / 64][a % 64];
    a -= 1024; if (a < 16)   return b2[a];
    a -= 16;   if (a < 64)   return w3[a / 16][a % 16];
    a -= 64;   return b3[a];
  endfunction

  function automatic shortint neuron(input shortint x[], input byte w[], input byte b);
    longint s;
    s = longint'(b) * 1024;
    foreach (x[i]) s += longint'(x[i]) * longint'(w[i]);
    s = s >>> 7;
    return shortint'(s & 64'hFFFF);
  endfunction

  function automatic void infer(input shortint x[64], output shortint score[4], output int cls);
    shortint h1[64], h2[16];
    shortint xin[];
    byte     wr[];
    xin = new[64];
    foreach (x[i]) xin[i] = x[i];
    for (int n = 0; n < 64; n++) begin
      wr = new[64];
      foreach (wr[i]) wr[i] = w1[n][i];
      h1[n] = neuron(xin, wr, b1[n]);
      if (h1[n] < 0) h1[n] = 0;
    end
    foreach (h1[i]) xin[i] = h1[i];
    for (int n = 0; n < 16; n++) begin
      wr = new[64];
      foreach (wr[i]) wr[i] = w2[n][i];
      h2[n] = neuron(xin, wr, b2[n]);
      if (h2[n] < 0) h2[n] = 0;
    end
    xin = new[16];
    foreach (h2[i]) xin[i] = h2[i];
    for (int n = 0; n < 4; n++) begin
      wr = new[16];
      foreach (wr[i]) wr[i] = w3[n][i];
      score[n] = neuron(xin, wr, b3[n]);
    end
    cls = 0;
    for (int n = 1; n < 4; n++) if (score[n] > score[cls]) cls = n;
  endfunction

  // random feature in <16,6>: values within +-4.0
  function automatic shortint rand_feature();
    return shortint'(int'(rng() % 8192) - 4096);
  endfunction
endpackage
