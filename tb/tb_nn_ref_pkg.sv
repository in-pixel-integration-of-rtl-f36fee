// tb_nn_ref_pkg -- integer reference model of the pT-filter network for the
// testbenches: y-profile -> Dense 16x58 -> ReLU -> Dense 58x3 -> argmax,
// computed with plain 32-bit integers (ties go to the lower index), plus
// helpers that build and serialise a weight image in the register order.
package tb_nn_ref_pkg;
  import smartpix_pkg::*;

  typedef struct {
    int w1 [N_HID][N_IN];
    int b1 [N_HID];
    int w2 [N_OUT][N_HID];
    int b2 [N_OUT];
  } nn_params_t;

  // Random weights in [-8, 7] and biases in [-128, 127].
  function automatic nn_params_t random_params();
    nn_params_t p;
    for (int o = 0; o < N_HID; o++) begin
      for (int i = 0; i < N_IN; i++) p.w1[o][i] = int'($urandom_range(15)) - 8;
      p.b1[o] = int'($urandom_range(255)) - 128;
    end
    for (int o = 0; o < N_OUT; o++) begin
      for (int i = 0; i < N_HID; i++) p.w2[o][i] = int'($urandom_range(15)) - 8;
      p.b2[o] = int'($urandom_range(255)) - 128;
    end
    return p;
  endfunction

  function automatic int nn_class(input nn_params_t p, input int prof [N_IN]);
    int h [N_HID];
    int s [N_OUT];
    int best;
    for (int o = 0; o < N_HID; o++) begin
      h[o] = p.b1[o];
      for (int i = 0; i < N_IN; i++) h[o] += p.w1[o][i] * prof[i];
      if (h[o] < 0) h[o] = 0;
    end
    for (int o = 0; o < N_OUT; o++) begin
      s[o] = p.b2[o];
      for (int i = 0; i < N_HID; i++) s[o] += p.w2[o][i] * h[i];
    end
    best = 0;
    for (int o = 1; o < N_OUT; o++) if (s[o] > s[best]) best = o;
    return best;
  endfunction

  // Serial image: bit k of the register is img[k]; fields in the order
  // w1 (o-major), b1, w2 (o-major), b2, each LSB first in the image.
  function automatic void image(input nn_params_t p, ref bit img[$]);
    img.delete();
    for (int o = 0; o < N_HID; o++)
      for (int i = 0; i < N_IN; i++)
        for (int k = 0; k < W_W; k++) img.push_back(bit'((p.w1[o][i] >>> k) & 1));
    for (int o = 0; o < N_HID; o++)
      for (int k = 0; k < B_W; k++) img.push_back(bit'((p.b1[o] >>> k) & 1));
    for (int o = 0; o < N_OUT; o++)
      for (int i = 0; i < N_HID; i++)
        for (int k = 0; k < W_W; k++) img.push_back(bit'((p.w2[o][i] >>> k) & 1));
    for (int o = 0; o < N_OUT; o++)
      for (int k = 0; k < B_W; k++) img.push_back(bit'((p.b2[o] >>> k) & 1));
  endfunction
endpackage
