// tb_fhe_ref_pkg: reference arithmetic for the testbenches.
//
// Plain software models of the reduced-cipher scheme, written directly from
// the formulas and independently of the RTL: ciphers are arrays of words
// modulo 2^ell, products use the `*` operator where the RTL uses bit
// selection and additions. Sizes up to 512 rows and 8 columns (the
// default ell = 64, n = 7).
package tb_fhe_ref_pkg;

  localparam int MAXR = 512;
  localparam int MAXC = 8;
  typedef longint unsigned word_t;
  typedef word_t cipher_t [MAXR][MAXC];

  function automatic word_t msk(word_t x, int ell);
    return (ell >= 64) ? x : (x & ((word_t'(1) << ell) - 1));
  endfunction

  function automatic bit bitof(word_t x, int k);
    return bit'((x >> k) & 1);
  endfunction

  // dst = (a + b) mod 2^ell
  function automatic void ref_add(ref cipher_t dst, ref cipher_t a, ref cipher_t b, input int ell, input int n);
    for (int i = 0; i < ell * (n + 1); i++)
      for (int j = 0; j <= n; j++) dst[i][j] = msk(a[i][j] + b[i][j], ell);
  endfunction

  // dst = (bitdecomp(a) * b) mod 2^ell
  function automatic void ref_mul(ref cipher_t dst, ref cipher_t a, ref cipher_t b, input int ell, input int n);
    int nr = ell * (n + 1);
    for (int i = 0; i < nr; i++) begin
      for (int j = 0; j <= n; j++) dst[i][j] = 0;
      for (int c = 0; c < nr; c++)
        if (bitof(a[i][c / ell], c % ell))
          for (int j = 0; j <= n; j++) dst[i][j] = msk(dst[i][j] + b[c][j], ell);
    end
  endfunction

  // dst = (alpha G + a) mod 2^ell
  function automatic void ref_sadd(ref cipher_t dst, ref cipher_t a, input word_t alpha, input int ell, input int n);
    for (int i = 0; i < ell * (n + 1); i++)
      for (int j = 0; j <= n; j++)
        dst[i][j] = msk(a[i][j] + ((j == i / ell) ? (alpha << (i % ell)) : 0), ell);
  endfunction

  // dst = ([alpha G]^l a) mod 2^ell, computed over the full N x N bit matrix
  function automatic void ref_smul(ref cipher_t dst, ref cipher_t a, input word_t alpha, input int ell, input int n);
    int nr = ell * (n + 1);
    for (int i = 0; i < nr; i++) begin
      word_t w = msk(alpha << (i % ell), ell);
      for (int j = 0; j <= n; j++) dst[i][j] = 0;
      for (int c = 0; c < nr; c++)
        if ((c / ell) == (i / ell) && bitof(w, c % ell))
          for (int j = 0; j <= n; j++) dst[i][j] = msk(dst[i][j] + a[c][j], ell);
    end
  endfunction

  // v_i = (C~ s)_i for the first ell rows, s = [1, -t]
  function automatic word_t ref_dec_value(ref cipher_t c, input word_t t [MAXC], input int i, input int ell, input int n);
    word_t v = c[i][0];
    for (int j = 1; j <= n; j++) v = v - c[i][j] * t[j-1];
    return msk(v, ell);
  endfunction

  // Rounding decoder: bit by bit from the least significant bit.
  function automatic word_t ref_mpdec(word_t v [64], int ell);
    word_t mu = 0;
    for (int i = 0; i < ell; i++) begin
      word_t r = msk(v[ell-1-i] - (mu << (ell-1-i)), ell);
      word_t top = (r >> (ell - 2)) & 3;
      if (top == 1 || top == 2) mu = mu | (word_t'(1) << i);
    end
    return mu;
  endfunction

  function automatic word_t ref_decrypt(ref cipher_t c, input word_t t [MAXC], input int ell, input int n);
    word_t v [64];
    for (int i = 0; i < 64; i++) v[i] = 0;
    for (int i = 0; i < ell; i++) v[i] = ref_dec_value(c, t, i, ell, n);
    return ref_mpdec(v, ell);
  endfunction

  // Encryption with a key: A = [b, B] given (m rows), R bits given per row.
  function automatic void ref_encrypt(ref cipher_t dst, input word_t mu, ref cipher_t a,
                                      ref word_t rbits [MAXR], input int ell, input int n, input int m);
    for (int i = 0; i < ell * (n + 1); i++)
      for (int j = 0; j <= n; j++) begin
        word_t acc = (j == i / ell) ? (mu << (i % ell)) : 0;
        for (int r = 0; r < m; r++) if (bitof(rbits[i], r)) acc = acc + a[r][j];
        dst[i][j] = msk(acc, ell);
      end
  endfunction

  // Arithmetic right shift of an ell-bit word, result ell bits.
  function automatic word_t ref_sra(word_t x, int sh, int ell);
    longint s = longint'(x << (64 - ell)) >>> (64 - ell);   // sign-extend
    return msk(word_t'(s >>> sh), ell);
  endfunction

endpackage
