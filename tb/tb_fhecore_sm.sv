// tb_fhecore_sm: end-to-end test of fhecore_sm at its default size
// (four FHECore units of 16x8 PEs, each sharing a register port with a
// Tensor Core).
//
// For every unit a register-file model issues a stream of operations on the
// shared read port: FHEC.16816 bursts for the FHECore unit, alternating
// between one modulus in all columns (an NTT tile) and eight different
// moduli (a base-conversion tile), interleaved with short Tensor Core
// bursts. A Tensor Core model accepts its bursts and, some cycles later,
// writes a 2-beat result, so that it competes with the FHECore result for
// the shared write port. The register-file write model applies random
// back-pressure and checks every FHECore result against (A*B + C) mod q[c]
// computed by the simulator, and every Tensor Core result against what that
// model sent.
//
// Mechanisms that must each occur at least once (counted, failure if not):
// FHEC completion on every unit, NTT-style and base-conversion-style
// operations, reads routed to the Tensor Core, write-port stalls between the
// two units, and back-pressure on the read port. The run time of every FHEC
// is checked: fc_done must come 44 cycles after its last operand beat.
module tb_fhecore_sm;
  import fhecore_pkg::*;
  import fhecore_tb_pkg::*;

  localparam int NU     = NUM_FC;
  localparam int NOPS   = 6;      // FHEC operations per unit
  localparam int TC_LEN = 3;      // read beats of a Tensor Core burst
  localparam int TC_WR  = 2;      // write beats of a Tensor Core result

  logic  clk = 1'b0;
  logic  rst_n = 1'b0;
  logic  rf_rd_valid [NU];
  logic  rf_rd_ready [NU];
  beat_t rf_rd_beat  [NU];
  dst_e  rf_rd_dst   [NU];
  logic  rf_wr_valid [NU];
  logic  rf_wr_ready [NU];
  beat_t rf_wr_beat  [NU];
  dst_e  rf_wr_src   [NU];
  logic  tc_rd_valid [NU];
  logic  tc_rd_ready [NU];
  beat_t tc_rd_beat  [NU];
  logic  tc_wr_valid [NU];
  logic  tc_wr_ready [NU];
  beat_t tc_wr_beat  [NU];
  logic  fc_busy     [NU];
  logic  fc_done     [NU];
  logic  wr_stall    [NU];

  fhecore_sm dut (.*);

  int checks = 0, failures = 0;
  longint cycle = 0;
  // mechanism counters
  int n_done [NU];
  int n_ntt = 0, n_bconv = 0, n_tc_rd = 0, n_stall = 0, n_rd_bp = 0;
  int lanes_finished = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  for (genvar i = 0; i < NU; i++) begin : g_lane
    word_t  exp_d [$];      // expected D words, row-major, operation after operation
    int     exp_tc [$];
    longint fc_last_rd [$];
    int     tc_pending [$];
    bit     src_done = 1'b0;
    int     fc_got = 0, tc_got = 0, tc_sent = 0;

    // ---------------------------------------------- register-file read model
    initial begin
      mat_a_t a;
      mat_b_t b;
      mat_c_t c;
      vec_q_t q, mu;
      burst_t bt;
      word_t  q0, qmin;
      n_done[i] = 0;
      rf_rd_valid[i] = 1'b0;
      rf_rd_beat[i]  = '0;
      rf_rd_dst[i]   = DST_TC;
      wait (rst_n);
      for (int op = 0; op < NOPS; op++) begin
        // a Tensor Core burst before every other FHEC
        if (op % 2 == 0) begin
          for (int k = 0; k < TC_LEN; k++) begin
            @(negedge clk);
            rf_rd_valid[i] = 1'b1;
            rf_rd_dst[i]   = DST_TC;
            rf_rd_beat[i]  = '0;
            rf_rd_beat[i].data[0] = 32'h7c00_0000 | word_t'(tc_sent);
            rf_rd_beat[i].last    = (k == TC_LEN - 1);
            @(posedge clk);
            while (!rf_rd_ready[i]) @(posedge clk);
          end
          exp_tc.push_back(tc_sent);
          tc_sent++;
          n_tc_rd++;
        end
        // FHEC.16816 operands
        q0 = rand_q();
        for (int j = 0; j < COLS; j++) begin
          q[j]  = (op % 2 == 0) ? q0 : rand_q();
          mu[j] = mu_ref(q[j]);
        end
        if (op % 2 == 0) n_ntt++; else n_bconv++;
        qmin = q[0];
        for (int j = 1; j < COLS; j++) if (q[j] < qmin) qmin = q[j];
        for (int r = 0; r < ROWS; r++)
          for (int k = 0; k < KDIM; k++) a[r][k] = rand_res(qmin);
        for (int k = 0; k < KDIM; k++)
          for (int j = 0; j < COLS; j++) b[k][j] = rand_res(q[j]);
        for (int r = 0; r < ROWS; r++)
          for (int j = 0; j < COLS; j++) c[r][j] = rand_res(q[j]);
        begin
          mat_c_t d;
          d = mmm_ref(a, b, c, q);
          for (int r = 0; r < ROWS; r++)
            for (int j = 0; j < COLS; j++) exp_d.push_back(d[r][j]);
        end
        bt = make_burst(a, b, c, q, mu);
        for (int k = 0; k < RD_BEATS; k++) begin
          @(negedge clk);
          rf_rd_valid[i] = 1'b1;
          rf_rd_dst[i]   = DST_FC;
          rf_rd_beat[i]  = bt[k];
          @(posedge clk);
          while (!rf_rd_ready[i]) begin
            if (k == 0) n_rd_bp++;
            @(posedge clk);
          end
        end
        fc_last_rd.push_back(cycle);
        @(negedge clk);
        rf_rd_valid[i] = 1'b0;
      end
      src_done = 1'b1;
    end

    // ---------------------------------------------------- Tensor Core model
    initial begin
      tc_rd_ready[i] = 1'b1;
      tc_wr_valid[i] = 1'b0;
      tc_wr_beat[i]  = '0;
    end
    always @(posedge clk) if (rst_n && tc_rd_valid[i] && tc_rd_ready[i] && tc_rd_beat[i].last)
      tc_pending.push_back(int'(tc_rd_beat[i].data[0] & 32'hffff));
    initial begin
      int id;
      wait (rst_n);
      forever begin
        @(negedge clk);
        if (tc_pending.size() != 0) begin
          id = tc_pending.pop_front();
          // answer about when the following FHEC result is due
          repeat (58 + $urandom % 8) @(negedge clk);
          for (int k = 0; k < TC_WR; k++) begin
            tc_wr_valid[i] = 1'b1;
            tc_wr_beat[i]  = '0;
            tc_wr_beat[i].data[0] = 32'h7c00_0000 | word_t'(id);
            tc_wr_beat[i].data[1] = word_t'(k);
            tc_wr_beat[i].last    = (k == TC_WR - 1);
            @(posedge clk);
            while (!tc_wr_ready[i]) @(posedge clk);
            @(negedge clk);
          end
          tc_wr_valid[i] = 1'b0;
        end
      end
    end

    // ---------------------------------------- register-file write model
    int     fc_beat = 0;
    always @(negedge clk) rf_wr_ready[i] <= ($urandom % 4 != 0);

    always @(posedge clk) if (rst_n) begin
      if (fc_done[i]) begin
        longint t;
        n_done[i]++;
        checks++;
        if (fc_last_rd.size() == 0) begin
          failures++; $display("FAIL: unit %0d fc_done without operation", i);
        end else begin
          t = fc_last_rd.pop_front();
          if (cycle - t != MMM_CYCLES) begin
            failures++;
            $display("FAIL: unit %0d run %0d cycles, expected %0d", i, cycle - t, MMM_CYCLES);
          end
        end
      end
      if (wr_stall[i]) n_stall++;
      if (rf_wr_valid[i] && rf_wr_ready[i]) begin
        if (rf_wr_src[i] == DST_FC) begin
          for (int w = 0; w < LANES; w++) begin
            int    idx;
            word_t e;
            idx = fc_beat * LANES + w;
            e   = exp_d.pop_front();
            checks++;
            if (rf_wr_beat[i].data[w] !== e) begin
              failures++;
              if (failures < 10)
                $display("FAIL: unit %0d D[%0d][%0d]=%0d exp %0d", i, idx / COLS, idx % COLS,
                         rf_wr_beat[i].data[w], e);
            end
          end
          fc_beat = rf_wr_beat[i].last ? 0 : fc_beat + 1;
          if (rf_wr_beat[i].last) fc_got++;
        end else begin
          checks++;
          if (rf_wr_beat[i].data[0] != (32'h7c00_0000 | word_t'(exp_tc[0]))) begin
            failures++; $display("FAIL: unit %0d Tensor Core result out of order", i);
          end
          if (rf_wr_beat[i].last) begin
            void'(exp_tc.pop_front());
            tc_got++;
          end
        end
      end
    end

    initial begin
      wait (src_done && fc_got == NOPS && tc_got == tc_sent);
      lanes_finished++;
    end
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    wait (lanes_finished == NU);
    repeat (5) @(negedge clk);
    for (int i = 0; i < NU; i++) begin
      checks++;
      if (n_done[i] != NOPS) begin
        failures++; $display("FAIL: unit %0d completed %0d of %0d FHEC", i, n_done[i], NOPS);
      end
    end
    checks++;
    if (n_ntt == 0 || n_bconv == 0 || n_tc_rd == 0 || n_stall == 0 || n_rd_bp == 0) begin
      failures++;
      $display("FAIL: a mechanism never occurred");
    end
    $display("FHEC per unit %0d, NTT-style %0d, base-conversion-style %0d", NOPS, n_ntt, n_bconv);
    $display("Tensor Core bursts %0d, write-port stall cycles %0d, read-port back-pressure %0d",
             n_tc_rd, n_stall, n_rd_bp);
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
