// qrng_tb_pkg -- reference models shared by the QRNG testbenches.
//
// toeplitz_ref computes the Toeplitz hash straight from its definition,
// y[i] = XOR_j T[i][j] & x[j] with T[i][j] = seed[i - j + n - 1], with no
// reference to the pipelined hardware. seed_word gives the j-th of nwords
// seed words to write so that, after word-serial loading (each word shifted
// in at the low end), the seed register holds seed[0..len-1].
package qrng_tb_pkg;

  typedef bit bitvec_t[];

  function automatic bitvec_t toeplitz_ref(bitvec_t seed, bitvec_t raw, int m, int n);
    bitvec_t y = new[m];
    for (int i = 0; i < m; i++) begin
      bit a = 1'b0;
      for (int j = 0; j < n; j++) a ^= seed[i - j + n - 1] & raw[j];
      y[i] = a;
    end
    return y;
  endfunction

  function automatic bit [31:0] seed_word(bitvec_t seed, int j, int nwords);
    bit [31:0] w = '0;
    int q = nwords - 1 - j;
    for (int b = 0; b < 32; b++)
      if (32 * q + b < seed.size()) w[b] = seed[32 * q + b];
    return w;
  endfunction

  function automatic bitvec_t random_bits(int len);
    bitvec_t v = new[len];
    for (int i = 0; i < len; i++) v[i] = bit'($urandom_range(1, 0));
    return v;
  endfunction

endpackage
