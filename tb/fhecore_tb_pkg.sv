// fhecore_tb_pkg: reference arithmetic for the FHECore testbenches.
//
// Everything here is computed with plain 64-bit integer '%' and '/', never
// with Barrett reduction, so the testbenches compare the hardware against an
// independent model. Also holds helpers that build register-port beats in
// the beat order fhecore_unit expects.
package fhecore_tb_pkg;
  import fhecore_pkg::*;

  typedef longint unsigned u64;

  function automatic int unsigned bitlen_ref(input u64 v);
    int unsigned n = 0;
    while (v != 0) begin
      n++;
      v = v >> 1;
    end
    return n;
  endfunction

  // mu = floor(2^k / q) with k = 2*bitlen(q); q < 2^31 keeps k <= 62.
  function automatic word_t mu_ref(input word_t q);
    u64 two_k;
    two_k = u64'(1) << (2 * bitlen_ref(u64'(q)));
    return word_t'(two_k / u64'(q));
  endfunction

  function automatic word_t mulmod(input word_t a, input word_t b, input word_t q);
    return word_t'((u64'(a) * u64'(b)) % u64'(q));
  endfunction

  function automatic word_t addmod(input word_t a, input word_t b, input word_t q);
    return word_t'((u64'(a) + u64'(b)) % u64'(q));
  endfunction

  // A random modulus of random bit length in [2, 31] bits, at least 2.
  function automatic word_t rand_q();
    int unsigned n;
    word_t q;
    n = 2 + ($urandom % 30);                      // 2..31 bits
    q = word_t'((u64'(1) << (n - 1)) | (u64'($urandom) & ((u64'(1) << (n - 1)) - 1)));
    if (q < 2) q = 2;
    return q;
  endfunction

  function automatic word_t rand_res(input word_t q);
    return word_t'(u64'($urandom) % u64'(q));
  endfunction

  // Full FHEC.16816 reference: D = A*B + C mod q[c].
  typedef word_t mat_a_t [ROWS][KDIM];
  typedef word_t mat_b_t [KDIM][COLS];
  typedef word_t mat_c_t [ROWS][COLS];
  typedef word_t vec_q_t [COLS];

  function automatic mat_c_t mmm_ref(input mat_a_t a, input mat_b_t b,
                                     input mat_c_t c, input vec_q_t q);
    mat_c_t d;
    for (int r = 0; r < ROWS; r++)
      for (int j = 0; j < COLS; j++) begin
        u64 s = u64'(c[r][j]);
        for (int k = 0; k < KDIM; k++)
          s = (s + (u64'(a[r][k]) * u64'(b[k][j])) % u64'(q[j])) % u64'(q[j]);
        d[r][j] = word_t'(s);
      end
    return d;
  endfunction

  // Read burst of one FHEC operation, in fhecore_unit's beat order.
  typedef beat_t burst_t [RD_BEATS];

  function automatic burst_t make_burst(input mat_a_t a, input mat_b_t b,
                                        input mat_c_t c, input vec_q_t q,
                                        input vec_q_t mu);
    burst_t bt;
    for (int i = 0; i < RD_BEATS; i++) begin
      bt[i].data = '0;
      bt[i].last = (i == RD_BEATS - 1);
    end
    for (int j = 0; j < COLS; j++) begin
      bt[0].data[j]        = q[j];
      bt[0].data[COLS + j] = mu[j];
    end
    for (int idx = 0; idx < ROWS * KDIM; idx++)
      bt[1 + idx / LANES].data[idx % LANES] = a[idx / KDIM][idx % KDIM];
    for (int idx = 0; idx < KDIM * COLS; idx++)
      bt[1 + A_BEATS + idx / LANES].data[idx % LANES] = b[idx / COLS][idx % COLS];
    for (int idx = 0; idx < ROWS * COLS; idx++)
      bt[1 + A_BEATS + B_BEATS + idx / LANES].data[idx % LANES] = c[idx / COLS][idx % COLS];
    return bt;
  endfunction

endpackage
