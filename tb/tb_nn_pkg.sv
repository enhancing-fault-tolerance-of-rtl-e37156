// tb_nn_pkg: reference material for the test benches of the network.
//
//  * aes_sbox(): the AES S-box computed from its definition (inverse in
//    GF(2^8) modulo x^8+x^4+x^3+x+1, then the affine map with constant 0x63),
//    so no table is copied into the tests.
//  * nn_model: a plain integer model of the 8-N_HID-N_OUT network
//    (h = ReLU(W1 x + b1), y = W2 h + b2, answer = lowest index of max y),
//    written without reference to the hardware's structure.  It can hold
//    random parameters or the constructed S-box network below.
//
// Constructed S-box network for key byte key.  Hidden neuron j copies input
// bit i = j mod 8 with weight 2 (h_j = 2*x_i), so every input bit has
// N_HID/8 copies.  Output neuron k has the pattern p = InvSBox(k) xor key;
// its weights are +1 from copies of bits where p is 1 and -1 elsewhere, and
// its bias is -(N_HID/8)*sum_i(2p_i-1).  Then
//   y_k = (N_HID/8) * sum_i (2p_i-1)(2x_i-1) = (N_HID/8) * (8 - 2*dist(x,p)),
// which is largest, uniquely, for the k with p = x, i.e. k = SBox(x xor key).
// The winning margin over the runner-up (distance 1) is 2*(N_HID/8).
package tb_nn_pkg;
  import nn_pkg::*;

  function automatic logic [7:0] gf_mul(logic [7:0] a, logic [7:0] b);
    logic [7:0] r = '0;
    for (int i = 0; i < 8; i++) begin
      if (b[i]) r ^= a;
      a = a[7] ? ((a << 1) ^ 8'h1b) : (a << 1);
    end
    return r;
  endfunction

  function automatic logic [7:0] aes_sbox(logic [7:0] x);
    logic [7:0] inv = 8'h01, b;
    // x^254 = x^-1 in GF(2^8) (and 0 for x = 0)
    for (int i = 0; i < 254; i++) inv = gf_mul(inv, x);
    if (x == 0) inv = 8'h00;
    b = inv;
    return b ^ {b[6:0], b[7]} ^ {b[5:0], b[7:6]} ^ {b[4:0], b[7:5]} ^ {b[3:0], b[7:4]} ^ 8'h63;
  endfunction

  class nn_model;
    int nh, no;
    int w1 [][];   // [j][i]
    int b1 [];     // [j]
    int w2 [][];   // [k][j]
    int b2 [];     // [k]
    int h  [];     // last activations
    longint y [];  // last outputs
    int neg_pre;   // hidden pre-activations clamped by ReLU in last run

    function new(int nh_ = N_HID, int no_ = N_OUT);
      nh = nh_;  no = no_;
      w1 = new[nh];  b1 = new[nh];  h = new[nh];
      foreach (w1[j]) w1[j] = new[N_IN];
      w2 = new[no];  b2 = new[no];  y = new[no];
      foreach (w2[k]) w2[k] = new[nh];
    endfunction

    function automatic int srand(int bits);
      return int'($urandom_range((1 << bits) - 1, 0)) - (1 << (bits - 1));
    endfunction

    function void set_random();
      foreach (w1[j]) begin
        foreach (w1[j][i]) w1[j][i] = srand(W1_W);
        b1[j] = srand(B1_W);
      end
      foreach (w2[k]) begin
        foreach (w2[k][j]) w2[k][j] = srand(W2_W);
        b2[k] = srand(B2_W);
      end
    endfunction

    function void set_sbox(logic [7:0] key);
      logic [7:0] inv [256];
      int copies = nh / 8;
      for (int v = 0; v < 256; v++) inv[aes_sbox(8'(v))] = 8'(v);
      foreach (w1[j]) begin
        foreach (w1[j][i]) w1[j][i] = (i == j % 8) ? 2 : 0;
        b1[j] = 0;
      end
      foreach (w2[k]) begin
        logic [7:0] p = inv[k % 256] ^ key;
        int s = 0;
        for (int i = 0; i < 8; i++) s += p[i] ? 1 : -1;
        foreach (w2[k][j]) w2[k][j] = p[j % 8] ? 1 : -1;
        b2[k] = -copies * s;
      end
    endfunction

    function int infer(logic [7:0] x);
      int best = 0;
      neg_pre = 0;
      foreach (h[j]) begin
        int s = b1[j];
        for (int i = 0; i < N_IN; i++) if (x[i]) s += w1[j][i];
        if (s < 0) neg_pre++;
        h[j] = (s > 0) ? s : 0;
      end
      foreach (y[k]) begin
        longint s = b2[k];
        foreach (h[j]) s += longint'(h[j]) * w2[k][j];
        y[k] = s;
        if (s > y[best]) best = k;
      end
      return best;
    endfunction
  endclass

endpackage
