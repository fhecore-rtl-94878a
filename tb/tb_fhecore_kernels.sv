// tb_fhecore_kernels: the two FHE kernels FHECore is built for, each run as
// FHEC.16816 operations on one fhecore_unit.
//
// 1. NTT tile. A = the 16x16 Vandermonde matrix W[j][k] = w^(j*k) mod q for a
//    primitive 16th root of unity w modulo q = 998244353, B = eight random
//    16-point vectors (one per column), C = 0. D = W*B is the forward NTT of
//    every column. A second operation multiplies D by the inverse matrix
//    16^-1 * w^(-j*k); the result must be the original vectors (round trip),
//    and D itself is compared with the NTT sum evaluated directly.
// 2. Base-conversion tile ("mixed moduli"). Four source moduli p_j and eight
//    target moduli q_i, a different one per array column. A holds
//    [x_n * Phat_j^-1]_{p_j} for 16 coefficients n, B holds [Phat_j]_{q_i}
//    (rows beyond the four source moduli are zero). Each output D[n][i] must
//    equal (sum_j [x_n Phat_j^-1]_{p_j} * Phat_j) mod q_i, evaluated here as
//    one exact 64-bit integer before a single reduction.
module tb_fhecore_kernels;
  import fhecore_pkg::*;
  import fhecore_tb_pkg::*;

  logic  clk = 1'b0;
  logic  rst_n = 1'b0;
  logic  rd_valid, rd_ready, wr_valid, wr_ready, busy, mmm_done;
  beat_t rd_beat, wr_beat;

  int checks = 0, failures = 0;

  fhecore_unit dut (.*);

  always #5 clk = ~clk;

  function automatic word_t powmod(input word_t b, input u64 e, input word_t q);
    u64 r = 1, x = u64'(b) % u64'(q);
    while (e != 0) begin
      if (e[0]) r = (r * x) % u64'(q);
      x = (x * x) % u64'(q);
      e = e >> 1;
    end
    return word_t'(r);
  endfunction

  // one FHEC operation through the unit's ports
  task automatic run_op(input mat_a_t a, input mat_b_t b, input mat_c_t c,
                        input vec_q_t q, output mat_c_t d);
    vec_q_t mu;
    burst_t bt;
    int got;
    for (int j = 0; j < COLS; j++) mu[j] = mu_ref(q[j]);
    bt = make_burst(a, b, c, q, mu);
    for (int i = 0; i < RD_BEATS; i++) begin
      @(negedge clk);
      rd_valid = 1'b1;
      rd_beat  = bt[i];
      @(posedge clk);
      while (!rd_ready) @(posedge clk);
    end
    @(negedge clk);
    rd_valid = 1'b0;
    wr_ready = 1'b1;
    got = 0;
    while (got < WR_BEATS) begin
      @(posedge clk);
      if (wr_valid) begin
        for (int w = 0; w < LANES; w++) begin
          int idx;
          idx = got * LANES + w;
          d[idx / COLS][idx % COLS] = wr_beat.data[w];
        end
        got++;
      end
    end
    @(negedge clk);
    wr_ready = 1'b0;
  endtask

  mat_a_t a;
  mat_b_t b, b2;
  mat_c_t c0, d, d2;
  vec_q_t q;

  task automatic ntt_tile();
    word_t qq, w, wi, n_inv;
    qq = 32'd998244353;                    // 119 * 2^23 + 1, generator 3
    w  = powmod(32'd3, (u64'(qq) - 1) / 16, qq);
    wi = powmod(w, u64'(qq) - 2, qq);
    n_inv = powmod(32'd16, u64'(qq) - 2, qq);
    checks++;
    if (powmod(w, 8, qq) != qq - 1 || powmod(w, 16, qq) != 1) begin
      failures++; $display("FAIL: w is not a primitive 16th root");
    end
    for (int j = 0; j < COLS; j++) q[j] = qq;
    for (int r = 0; r < ROWS; r++)
      for (int k = 0; k < KDIM; k++) a[r][k] = powmod(w, u64'(r * k), qq);
    for (int k = 0; k < KDIM; k++)
      for (int j = 0; j < COLS; j++) b[k][j] = rand_res(qq);
    for (int r = 0; r < ROWS; r++)
      for (int j = 0; j < COLS; j++) c0[r][j] = '0;
    run_op(a, b, c0, q, d);
    // direct NTT sum
    for (int col = 0; col < COLS; col++)
      for (int kk = 0; kk < 16; kk++) begin
        u64 s = 0;
        for (int jj = 0; jj < 16; jj++)
          s = (s + u64'(b[jj][col]) * u64'(powmod(w, u64'(jj * kk), qq))) % u64'(qq);
        checks++;
        if (d[kk][col] !== word_t'(s)) begin
          failures++; $display("FAIL: NTT col %0d k %0d", col, kk);
        end
      end
    // inverse NTT: A' = 16^-1 * w^-(jk), B' = D
    for (int r = 0; r < ROWS; r++)
      for (int k = 0; k < KDIM; k++) a[r][k] = mulmod(n_inv, powmod(wi, u64'(r * k), qq), qq);
    for (int k = 0; k < KDIM; k++)
      for (int j = 0; j < COLS; j++) b2[k][j] = d[k][j];
    run_op(a, b2, c0, q, d2);
    for (int r = 0; r < ROWS; r++)
      for (int j = 0; j < COLS; j++) begin
        checks++;
        if (d2[r][j] !== b[r][j]) begin
          failures++; $display("FAIL: INTT(NTT(x)) != x at %0d,%0d", r, j);
        end
      end
  endtask

  task automatic bconv_tile();
    localparam int ALPHA = 4;
    word_t p [ALPHA];
    u64    pstar, phat [ALPHA];
    word_t phat_inv [ALPHA];
    u64    x [ROWS];
    p[0] = 32'd12289; p[1] = 32'd13313; p[2] = 32'd15361; p[3] = 32'd16001;
    pstar = 1;
    for (int j = 0; j < ALPHA; j++) pstar = pstar * u64'(p[j]);
    for (int j = 0; j < ALPHA; j++) begin
      phat[j] = pstar / u64'(p[j]);
      // inverse of Phat_j modulo p_j, found by search (needs only that the
      // p_j are pairwise coprime, not that they are prime)
      phat_inv[j] = '0;
      for (int t = 1; t < int'(p[j]); t++)
        if ((u64'(phat[j] % u64'(p[j])) * u64'(t)) % u64'(p[j]) == 1) begin
          phat_inv[j] = word_t'(t);
          break;
        end
    end
    for (int i = 0; i < COLS; i++) q[i] = word_t'(32'h3000_0001 + 32'(2 * i * 7919));
    for (int n = 0; n < ROWS; n++) begin
      x[n] = u64'({$urandom, $urandom}) % pstar;
      for (int k = 0; k < KDIM; k++)
        a[n][k] = (k < ALPHA) ? mulmod(word_t'(x[n] % u64'(p[k])), phat_inv[k], p[k]) : '0;
    end
    for (int k = 0; k < KDIM; k++)
      for (int i = 0; i < COLS; i++)
        b[k][i] = (k < ALPHA) ? word_t'(phat[k] % u64'(q[i])) : '0;
    for (int r = 0; r < ROWS; r++)
      for (int j = 0; j < COLS; j++) c0[r][j] = '0;
    run_op(a, b, c0, q, d);
    for (int n = 0; n < ROWS; n++) begin
      u64 s = 0;
      for (int j = 0; j < ALPHA; j++) s += u64'(a[n][j]) * phat[j];   // < ALPHA * P
      for (int i = 0; i < COLS; i++) begin
        checks++;
        if (d[n][i] !== word_t'(s % u64'(q[i]))) begin
          failures++; $display("FAIL: base conversion n %0d target %0d", n, i);
        end
      end
      // the fast base conversion equals x + u*P for some 0 <= u < ALPHA
      checks++;
      if (s % pstar != x[n] || s / pstar >= ALPHA) begin
        failures++; $display("FAIL: CRT sum for coefficient %0d", n);
      end
    end
  endtask

  initial begin
    rd_valid = 1'b0;
    rd_beat  = '0;
    wr_ready = 1'b0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    repeat (3) ntt_tile();
    repeat (3) bconv_tile();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
