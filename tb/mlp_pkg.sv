// mlp_pkg -- the back-end classifier used by the testbench firmware model:
// an int8 multilayer perceptron 32 -> 74 -> 100 -> 4 (the layer widths of
// the heartbeat MLP), ReLU on the hidden layers.  Each neuron computes
//   acc = sum_i w[o][i] * x[i] + 64 * b[o]
// and a hidden activation is clamp(acc >>> 7, 0, 127); the class is the
// argmax of the four output accumulators (lowest index on ties).
// Weight image, bytes in this order: W1[74][32], b1[74], W2[100][74],
// b2[100], W3[4][100], b3[4], row-major, padded to whole words.  The
// requantization is a simple stand-in for the int8 inference library used
// on the real CPU.
package mlp_pkg;
  localparam int N_IN = 32, N_H1 = 74, N_H2 = 100, N_OUT = 4;
  localparam int OFF_W1 = 0;
  localparam int OFF_B1 = OFF_W1 + N_H1 * N_IN;
  localparam int OFF_W2 = OFF_B1 + N_H1;
  localparam int OFF_B2 = OFF_W2 + N_H2 * N_H1;
  localparam int OFF_W3 = OFF_B2 + N_H2;
  localparam int OFF_B3 = OFF_W3 + N_OUT * N_H2;
  localparam int IMG_BYTES = OFF_B3 + N_OUT;
  localparam int IMG_WORDS = (IMG_BYTES + 3) / 4;
  // byte address of the image in the program memory
  localparam logic [31:0] IMG_BASE = 32'h0000_8000;

  typedef byte signed img_t [IMG_WORDS * 4];

  function automatic int layer(const ref img_t img, input int off_w, input int off_b,
                               input int n_in, input int o, const ref int x [100]);
    int acc;
    acc = 64 * int'(img[off_b + o]);
    for (int i = 0; i < n_in; i++) acc += int'(img[off_w + o * n_in + i]) * x[i];
    return acc;
  endfunction

  function automatic int classify(const ref img_t img, input byte signed feat [32]);
    int x [100], h [100], acc, best, best_acc;
    for (int i = 0; i < 100; i++) x[i] = i < N_IN ? int'(feat[i]) : 0;
    for (int o = 0; o < N_H1; o++) begin
      acc = layer(img, OFF_W1, OFF_B1, N_IN, o, x) >>> 7;
      h[o] = acc < 0 ? 0 : acc > 127 ? 127 : acc;
    end
    for (int o = N_H1; o < 100; o++) h[o] = 0;
    x = h;
    for (int o = 0; o < N_H2; o++) begin
      acc = layer(img, OFF_W2, OFF_B2, N_H1, o, x) >>> 7;
      h[o] = acc < 0 ? 0 : acc > 127 ? 127 : acc;
    end
    x = h;
    best = 0; best_acc = 0;
    for (int o = 0; o < N_OUT; o++) begin
      acc = layer(img, OFF_W3, OFF_B3, N_H2, o, x);
      if (o == 0 || acc > best_acc) begin best = o; best_acc = acc; end
    end
    return best;
  endfunction
endpackage
