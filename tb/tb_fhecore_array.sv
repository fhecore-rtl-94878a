// tb_fhecore_array: self-checking test of the 16x8 fhecore_array.
//
// The testbench plays the role of the feeder: in step s it drives row r with
// A[r][s-r] and column c with B[s-c][c] (skewed streams, valid only inside
// the 16-term window). Each column gets its own random modulus, as in a base
// conversion. All 128 accumulators are compared with (A*B + C) mod q[c]
// computed by the simulator, and the timing rule is checked: the corner PE
// (15,7) must still lack its last term in step 42 and hold the final value in
// step 43, i.e. the whole product takes 44 cycles.
module tb_fhecore_array;
  import fhecore_pkg::*;
  import fhecore_tb_pkg::*;

  logic    clk = 1'b0;
  logic    rst_n = 1'b0;
  modcfg_t cfg      [COLS];
  word_t   h_in     [ROWS];
  logic    h_vld    [ROWS];
  word_t   v_in     [COLS];
  logic    v_vld    [COLS];
  logic    acc_load;
  word_t   acc_init [ROWS][COLS];
  word_t   acc      [ROWS][COLS];

  int checks = 0, failures = 0;

  fhecore_array dut (.*);

  always #5 clk = ~clk;

  mat_a_t a;
  mat_b_t b;
  mat_c_t c, d;
  vec_q_t q;

  task automatic one_mmm(input bit same_q);
    word_t q0;
    int    step_final;
    q0 = rand_q();
    for (int j = 0; j < COLS; j++) begin
      q[j]       = same_q ? q0 : rand_q();
      cfg[j].q   = q[j];
      cfg[j].k   = barrett_k(q[j]);
      cfg[j].mu  = mu_ref(q[j]);
    end
    // A entries must be residues of every column's modulus: reduce by the
    // smallest modulus so one A serves all columns.
    begin
      word_t qmin = q[0];
      for (int j = 1; j < COLS; j++) if (q[j] < qmin) qmin = q[j];
      for (int r = 0; r < ROWS; r++)
        for (int k = 0; k < KDIM; k++) a[r][k] = rand_res(qmin);
    end
    for (int k = 0; k < KDIM; k++)
      for (int j = 0; j < COLS; j++) b[k][j] = rand_res(q[j]);
    for (int r = 0; r < ROWS; r++)
      for (int j = 0; j < COLS; j++) c[r][j] = rand_res(q[j]);
    d = mmm_ref(a, b, c, q);
    step_final = MMM_CYCLES - 1;
    for (int s = 0; s <= step_final; s++) begin
      @(negedge clk);
      acc_load = (s == 0);
      acc_init = c;
      for (int r = 0; r < ROWS; r++) begin
        h_vld[r] = (s - r >= 0) && (s - r < KDIM);
        h_in[r]  = h_vld[r] ? a[r][s - r] : word_t'($urandom);
      end
      for (int j = 0; j < COLS; j++) begin
        v_vld[j] = (s - j >= 0) && (s - j < KDIM);
        v_in[j]  = v_vld[j] ? b[s - j][j] : word_t'($urandom);
      end
      if (s == step_final - 1) begin
        // corner PE still one term short in step 42
        word_t part;
        part = addmod(d[ROWS-1][COLS-1] + q[COLS-1],
                      q[COLS-1] - mulmod(a[ROWS-1][KDIM-1], b[KDIM-1][COLS-1], q[COLS-1]),
                      q[COLS-1]);
        checks++;
        if (acc[ROWS-1][COLS-1] !== part) begin
          failures++;
          $display("FAIL: corner PE not at 15 terms in step %0d", s);
        end
      end
      if (s == step_final) begin
        for (int r = 0; r < ROWS; r++)
          for (int j = 0; j < COLS; j++) begin
            checks++;
            if (acc[r][j] !== d[r][j]) begin
              failures++;
              if (failures < 10)
                $display("FAIL: D[%0d][%0d]=%0d exp %0d (q=%0d)", r, j, acc[r][j], d[r][j], q[j]);
            end
          end
      end
    end
    @(negedge clk);
    for (int r = 0; r < ROWS; r++) h_vld[r] = 1'b0;
    for (int j = 0; j < COLS; j++) v_vld[j] = 1'b0;
    acc_load = 1'b0;
    repeat (2) @(negedge clk);
  endtask

  initial begin
    for (int j = 0; j < COLS; j++) begin
      cfg[j] = '{q: 32'd17, mu: 32'd0, k: '0};
      v_in[j] = '0; v_vld[j] = 1'b0;
    end
    for (int r = 0; r < ROWS; r++) begin
      h_in[r] = '0; h_vld[r] = 1'b0;
      for (int j = 0; j < COLS; j++) acc_init[r][j] = '0;
    end
    acc_load = 1'b0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int m = 0; m < 12; m++) one_mmm(m % 3 == 0);
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
