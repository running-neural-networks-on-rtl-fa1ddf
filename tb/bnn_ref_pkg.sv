// bnn_ref_pkg: reference model used by the testbenches.
//
// Computes a binary fully connected layer the direct way, neuron by neuron:
// y[i] = (countones(~(w[i] ^ x)) over the n real inputs) >= n/2, which is
// the FC processing function the executor implements. It also packs a
// layer's weight vectors into 256-bit rows the way the executor's memory map
// expects: floor(256/n) vectors per row, vector j of row r at bits
// [j*n +: n], rows of layer k following those of layer k-1.
package bnn_ref_pkg;

  localparam int unsigned RW = 256;
  typedef logic [RW-1:0] vec_t;

  function automatic vec_t ref_layer(vec_t x, int unsigned n, int unsigned m,
                                     vec_t w [256]);
    vec_t y, mask;
    mask = (n == RW) ? '1 : ((vec_t'(1) << n) - 1);
    y = '0;
    for (int unsigned i = 0; i < m; i++)
      y[i] = ($countones(~(w[i] ^ x) & mask) >= int'(n / 2));
    return y;
  endfunction

  function automatic int unsigned npr(int unsigned n);
    return RW / n;
  endfunction

  function automatic int unsigned rows(int unsigned n, int unsigned m);
    return (m + npr(n) - 1) / npr(n);
  endfunction

  // Row r of a layer with fan-in n and m neurons.
  function automatic vec_t pack_row(int unsigned n, int unsigned m,
                                    vec_t w [256], int unsigned r);
    vec_t row, mask;
    mask = (n == RW) ? '1 : ((vec_t'(1) << n) - 1);
    row = '0;
    for (int unsigned j = 0; j < npr(n); j++)
      if (r * npr(n) + j < m)
        row |= (w[r * npr(n) + j] & mask) << (j * n);
    return row;
  endfunction

  function automatic vec_t rand_vec(int unsigned n);
    vec_t v, mask;
    mask = (n == RW) ? '1 : ((vec_t'(1) << n) - 1);
    for (int i = 0; i < RW / 32; i++) v[i*32 +: 32] = $urandom;
    return v & mask;
  endfunction

endpackage
