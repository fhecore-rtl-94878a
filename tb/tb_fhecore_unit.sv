// tb_fhecore_unit: self-checking test of one fhecore_unit (FHEC.16816).
//
// Sends operations as 17-beat read bursts (configuration, A, B, C), collects
// the 4-beat write bursts and compares D with (A*B + C) mod q[c] computed by
// the simulator. Operations alternate between one modulus for all columns
// (an NTT tile) and eight different moduli (a base-conversion tile). Half of
// the operations are sent with random gaps on the read port and random
// back-pressure on the write port. Checked as well:
//   - the array run takes exactly 44 cycles: the first write beat is
//     offered 45 cycles after the cycle that accepted the last read beat
//     (44 run cycles, then the write state),
//   - mmm_done pulses once per operation,
//   - rd_ready stays low while the unit is running or writing back.
module tb_fhecore_unit;
  import fhecore_pkg::*;
  import fhecore_tb_pkg::*;

  logic  clk = 1'b0;
  logic  rst_n = 1'b0;
  logic  rd_valid, rd_ready, wr_valid, wr_ready, busy, mmm_done;
  beat_t rd_beat, wr_beat;

  int checks = 0, failures = 0;
  longint cycle = 0;
  longint last_rd_cycle, first_wr_cycle;
  int done_count = 0;

  fhecore_unit dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;
  always @(posedge clk) if (rst_n && mmm_done) done_count++;

  mat_a_t a;
  mat_b_t b;
  mat_c_t c, d;
  vec_q_t q, mu;
  burst_t bt;

  task automatic one_op(input bit same_q, input bit stress);
    word_t qmin;
    int    got;
    int    done_before;
    bit    first;
    word_t q0;
    q0 = rand_q();
    for (int j = 0; j < COLS; j++) begin
      q[j]  = same_q ? q0 : rand_q();
      mu[j] = mu_ref(q[j]);
    end
    qmin = q[0];
    for (int j = 1; j < COLS; j++) if (q[j] < qmin) qmin = q[j];
    for (int r = 0; r < ROWS; r++)
      for (int k = 0; k < KDIM; k++) a[r][k] = rand_res(qmin);
    for (int k = 0; k < KDIM; k++)
      for (int j = 0; j < COLS; j++) b[k][j] = rand_res(q[j]);
    for (int r = 0; r < ROWS; r++)
      for (int j = 0; j < COLS; j++) c[r][j] = rand_res(q[j]);
    d  = mmm_ref(a, b, c, q);
    bt = make_burst(a, b, c, q, mu);
    done_before = done_count;

    // read burst
    for (int i = 0; i < RD_BEATS; i++) begin
      @(negedge clk);
      while (stress && ($urandom % 3 == 0)) begin
        rd_valid = 1'b0;
        @(negedge clk);
      end
      rd_valid = 1'b1;
      rd_beat  = bt[i];
      @(posedge clk);
      while (!rd_ready) @(posedge clk);
      last_rd_cycle = cycle;
    end
    @(negedge clk);
    rd_valid = 1'b0;

    // write burst
    got = 0;
    first = 1'b1;
    while (got < WR_BEATS) begin
      wr_ready = stress ? ($urandom % 2 == 0) : 1'b1;
      @(posedge clk);
      if (rst_n && rd_ready) begin
        checks++;
        failures++;
        $display("FAIL: rd_ready while busy");
      end
      if (wr_valid && first) begin
        first = 1'b0;
        first_wr_cycle = cycle;
        checks++;
        if (first_wr_cycle - last_rd_cycle != MMM_CYCLES + 1) begin
          failures++;
          $display("FAIL: run took %0d cycles, expected %0d",
                   first_wr_cycle - last_rd_cycle - 1, MMM_CYCLES);
        end
      end
      if (wr_valid && wr_ready) begin
        for (int w = 0; w < LANES; w++) begin
          int idx;
          idx = got * LANES + w;
          checks++;
          if (wr_beat.data[w] !== d[idx / COLS][idx % COLS]) begin
            failures++;
            if (failures < 10)
              $display("FAIL: D[%0d][%0d]=%0d exp %0d", idx / COLS, idx % COLS,
                       wr_beat.data[w], d[idx / COLS][idx % COLS]);
          end
        end
        checks++;
        if (wr_beat.last != (got == WR_BEATS - 1)) begin
          failures++;
          $display("FAIL: last flag on beat %0d", got);
        end
        got++;
      end
      @(negedge clk);
    end
    wr_ready = 1'b0;
    checks++;
    if (done_count != done_before + 1) begin
      failures++;
      $display("FAIL: mmm_done pulsed %0d times", done_count - done_before);
    end
  endtask

  initial begin
    rd_valid = 1'b0;
    rd_beat  = '0;
    wr_ready = 1'b0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int m = 0; m < 16; m++) one_op(m % 2 == 0, m % 4 >= 2);
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
