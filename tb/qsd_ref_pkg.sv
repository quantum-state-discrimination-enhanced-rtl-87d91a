// qsd_ref_pkg: reference model of the 2-8-4-1 discriminator network for the
// testbenches, written independently of the RTL with 64-bit integers.
//
// It holds one set of weights and biases (as plain ints, Q7.8), can fill
// them at random or with a hand-set network that separates two clusters
// on the I axis, returns the value belonging to each configuration
// address, and evaluates the network on an (I, Q) sample exactly as the
// hardware should: bias << 8 plus the sum of products, ReLU on the hidden
// layers, arithmetic shift right by 8, saturation to 16 bits.
package qsd_ref_pkg;

  int w1 [2][8]; int b1 [8];
  int w2 [8][4]; int b2 [4];
  int w3 [4][1]; int b3 [1];

  function automatic int rnd(int span);
    return int'($urandom_range(2 * span, 0)) - span;
  endfunction

  function automatic void random_weights(int span);
    foreach (w1[i, k]) w1[i][k] = rnd(span);
    foreach (b1[k])    b1[k]    = rnd(span);
    foreach (w2[i, k]) w2[i][k] = rnd(span);
    foreach (b2[k])    b2[k]    = rnd(span);
    foreach (w3[i, k]) w3[i][k] = rnd(span);
    foreach (b3[k])    b3[k]    = rnd(span);
  endfunction

  // A small network that computes score ~ I - t: neurons 0 and 1 of L1 pass
  // ReLU(I) and ReLU(-I), L2 neuron 0 forms their difference shifted up by
  // a margin, neuron 1 holds the margin, and L3 subtracts them. All other
  // weights are zero. With clusters centred at I = -1.0 and I = +1.0 the
  // state bit then follows the cluster. Values are Q7.8 (256 = 1.0).
  function automatic void separating_weights();
    foreach (w1[i, k]) w1[i][k] = 0;
    foreach (b1[k])    b1[k]    = 0;
    foreach (w2[i, k]) w2[i][k] = 0;
    foreach (b2[k])    b2[k]    = 0;
    foreach (w3[i, k]) w3[i][k] = 0;
    b3[0] = 0;
    w1[0][0] = 256;   // L1_0 = ReLU(I)
    w1[0][1] = -256;  // L1_1 = ReLU(-I)
    w2[0][0] = 256;   // L2_0 = ReLU(L1_0 - L1_1 + 4.0) = I + 4.0
    w2[1][0] = -256;
    b2[0]    = 1024;
    b2[1]    = 1024;  // L2_1 = 4.0
    w3[0][0] = 256;   // L3 = L2_0 - L2_1 = I
    w3[1][0] = -256;
  endfunction

  // Number of configuration entries of layer l (weights then biases).
  function automatic int cfg_count(int l);
    case (l)
      0: return 2 * 8 + 8;
      1: return 8 * 4 + 4;
      default: return 4 * 1 + 1;
    endcase
  endfunction

  function automatic int cfg_value(int l, int idx);
    case (l)
      0: return (idx < 16) ? w1[idx / 8][idx % 8] : b1[idx - 16];
      1: return (idx < 32) ? w2[idx / 4][idx % 4] : b2[idx - 32];
      default: return (idx < 4) ? w3[idx][0] : b3[0];
    endcase
  endfunction

  function automatic int act(longint s, bit relu);
    longint q;
    if (relu && s < 0) return 0;
    q = s >>> 8;
    if (q > 32767) return 32767;
    if (q < -32768) return -32768;
    return int'(q);
  endfunction

  // Score L3 of sample (i, q). neg_hidden counts hidden sums that ReLU cut.
  function automatic int score(int i, int q, ref int neg_hidden);
    int x [2];
    int h1 [8];
    int h2 [4];
    longint s;
    x[0] = i; x[1] = q;
    for (int k = 0; k < 8; k++) begin
      s = longint'(b1[k]) <<< 8;
      for (int j = 0; j < 2; j++) s += longint'(x[j]) * longint'(w1[j][k]);
      if (s < 0) neg_hidden++;
      h1[k] = act(s, 1'b1);
    end
    for (int k = 0; k < 4; k++) begin
      s = longint'(b2[k]) <<< 8;
      for (int j = 0; j < 8; j++) s += longint'(h1[j]) * longint'(w2[j][k]);
      if (s < 0) neg_hidden++;
      h2[k] = act(s, 1'b1);
    end
    s = longint'(b3[0]) <<< 8;
    for (int j = 0; j < 4; j++) s += longint'(h2[j]) * longint'(w3[j][0]);
    return act(s, 1'b0);
  endfunction

  // Expected output word: score in [15:0], state (score > 0) in [16].
  function automatic logic [31:0] result_word(int sc);
    return {15'd0, sc > 0, 16'(sc)};
  endfunction

endpackage
