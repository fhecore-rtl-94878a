// tb_rf_port_share: self-checking test of rf_port_share.
//
// Read side: the register-file model sends 60 bursts of random length with a
// random destination (Tensor Core or FHECore). The destination input is
// scrambled on every beat after the first, which the lock must ignore. Both
// unit models apply random back-pressure. Every beat must reach exactly the
// unit named on its burst's first beat, in order.
// Write side: both unit models offer 40 result bursts each, at random times,
// into a register-file write port with random back-pressure. Bursts must
// reach the register file whole (never interleaved), in order per unit, with
// rf_wr_src naming the sender. Cycles in which both units compete must show
// up as wr_stall, and when both start at once the grant must alternate.
module tb_rf_port_share;
  import fhecore_pkg::*;

  logic  clk = 1'b0;
  logic  rst_n = 1'b0;
  logic  rf_rd_valid, rf_rd_ready;
  beat_t rf_rd_beat;
  dst_e  rf_rd_dst;
  logic  rf_wr_valid, rf_wr_ready;
  beat_t rf_wr_beat;
  dst_e  rf_wr_src;
  logic  tc_rd_valid, tc_rd_ready, tc_wr_valid, tc_wr_ready;
  beat_t tc_rd_beat, tc_wr_beat;
  logic  fc_rd_valid, fc_rd_ready, fc_wr_valid, fc_wr_ready;
  beat_t fc_rd_beat, fc_wr_beat;
  logic  wr_stall;

  int checks = 0, failures = 0;
  int stall_cycles = 0, both_start = 0, alt_ok = 0;
  bit rd_done = 0, tc_done = 0, fc_done = 0;

  rf_port_share dut (.*);

  always #5 clk = ~clk;

  localparam int NRD = 60;
  localparam int NWR = 40;

  // data[0] = destination/source id, data[1] = burst number, data[2] = beat
  function automatic beat_t mk(input int id, input int n, input int k, input bit last);
    beat_t bb;
    bb.data    = '0;
    bb.data[0] = word_t'(id);
    bb.data[1] = word_t'(n);
    bb.data[2] = word_t'(k);
    bb.data[3] = $urandom;
    bb.last    = last;
    return bb;
  endfunction

  // ---------------------------------------------------------- read traffic
  int rd_len [NRD];
  dst_e rd_to [NRD];
  initial begin
    rf_rd_valid = 1'b0;
    rf_rd_beat  = '0;
    rf_rd_dst   = DST_TC;
    wait (rst_n);
    for (int n = 0; n < NRD; n++) begin
      rd_len[n] = 1 + $urandom % 5;
      rd_to[n]  = dst_e'($urandom % 2);
      for (int k = 0; k < rd_len[n]; k++) begin
        @(negedge clk);
        while ($urandom % 4 == 0) begin rf_rd_valid = 1'b0; @(negedge clk); end
        rf_rd_valid = 1'b1;
        rf_rd_beat  = mk(int'(rd_to[n]), n, k, k == rd_len[n] - 1);
        rf_rd_dst   = (k == 0) ? rd_to[n] : dst_e'($urandom % 2);
        @(posedge clk);
        while (!rf_rd_ready) @(posedge clk);
      end
    end
    @(negedge clk);
    rf_rd_valid = 1'b0;
    rd_done = 1'b1;
  end

  // unit read sinks
  int exp_n [2];
  int exp_k [2];
  initial begin exp_n[0] = -1; exp_n[1] = -1; exp_k[0] = 0; exp_k[1] = 0; end

  task automatic sink_check(input int id, input beat_t bb);
    checks++;
    if (bb.data[0] != word_t'(id)) begin
      failures++;
      $display("FAIL: beat for unit %0d reached unit %0d", bb.data[0], id);
      return;
    end
    if (exp_k[id] == 0) begin
      // start of a burst: must be the next burst for this unit
      int nxt;
      nxt = exp_n[id] + 1;
      while (nxt < NRD && rd_to[nxt] != dst_e'(id)) nxt++;
      if (bb.data[1] != word_t'(nxt) || bb.data[2] != 0) begin
        failures++;
        $display("FAIL: unit %0d got burst %0d beat %0d, expected burst %0d", id, bb.data[1], bb.data[2], nxt);
      end
      exp_n[id] = nxt;
    end else if (bb.data[1] != word_t'(exp_n[id]) || bb.data[2] != word_t'(exp_k[id])) begin
      failures++;
      $display("FAIL: unit %0d beat order", id);
    end
    exp_k[id] = bb.last ? 0 : exp_k[id] + 1;
  endtask

  always @(negedge clk) begin
    tc_rd_ready <= ($urandom % 3 != 0);
    fc_rd_ready <= ($urandom % 3 != 0);
    rf_wr_ready <= ($urandom % 3 != 0);
  end

  always @(posedge clk) if (rst_n) begin
    if (tc_rd_valid && tc_rd_ready) sink_check(0, tc_rd_beat);
    if (fc_rd_valid && fc_rd_ready) sink_check(1, fc_rd_beat);
    if (tc_rd_valid && fc_rd_valid) begin
      checks++; failures++;
      $display("FAIL: read beat offered to both units");
    end
  end

  // --------------------------------------------------------- write traffic
  task automatic wr_source(input int id);
    for (int n = 0; n < NWR; n++) begin
      int len;
      len = 1 + $urandom % 4;
      repeat ($urandom % 3) @(negedge clk);
      for (int k = 0; k < len; k++) begin
        @(negedge clk);
        if (id == 0) begin tc_wr_valid = 1'b1; tc_wr_beat = mk(id, n, k, k == len - 1); end
        else         begin fc_wr_valid = 1'b1; fc_wr_beat = mk(id, n, k, k == len - 1); end
        @(posedge clk);
        while (!((id == 0) ? tc_wr_ready : fc_wr_ready)) @(posedge clk);
      end
      @(negedge clk);
      if (id == 0) tc_wr_valid = 1'b0; else fc_wr_valid = 1'b0;
    end
  endtask

  initial begin
    tc_wr_valid = 1'b0; fc_wr_valid = 1'b0; tc_wr_beat = '0; fc_wr_beat = '0;
    wait (rst_n);
    fork
      begin wr_source(0); tc_done = 1'b1; end
      begin wr_source(1); fc_done = 1'b1; end
    join_none
  end

  // register-file write sink
  int  wr_next [2];
  int  cur_src = -1, cur_n, cur_k;
  int  last_start_src = -1;
  initial begin wr_next[0] = 0; wr_next[1] = 0; end

  always @(posedge clk) if (rst_n) begin
    if (tc_wr_valid && fc_wr_valid) begin
      stall_cycles++;
      checks++;
      if (!wr_stall) begin failures++; $display("FAIL: competing writers without wr_stall"); end
    end
    if (rf_wr_valid && rf_wr_ready) begin
      int id;
      id = int'(rf_wr_beat.data[0]);
      checks++;
      if (id != int'(rf_wr_src)) begin failures++; $display("FAIL: rf_wr_src wrong"); end
      if (cur_src < 0) begin
        if (tc_wr_valid && fc_wr_valid && last_start_src >= 0) begin
          both_start++;
          if (id != last_start_src) alt_ok++;
        end
        if (rf_wr_beat.data[1] != word_t'(wr_next[id]) || rf_wr_beat.data[2] != 0) begin
          failures++; $display("FAIL: write burst order for unit %0d", id);
        end
        cur_src = id; cur_n = int'(rf_wr_beat.data[1]); cur_k = 0;
        last_start_src = id;
      end else if (id != cur_src || rf_wr_beat.data[1] != word_t'(cur_n)
                   || rf_wr_beat.data[2] != word_t'(cur_k)) begin
        failures++; $display("FAIL: write bursts interleaved");
      end
      cur_k++;
      if (rf_wr_beat.last) begin
        wr_next[id]++;
        cur_src = -1;
      end
    end
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    wait (rd_done && tc_done && fc_done);
    repeat (5) @(negedge clk);
    checks++;
    if (wr_next[0] != NWR || wr_next[1] != NWR) begin
      failures++; $display("FAIL: %0d/%0d write bursts arrived", wr_next[0], wr_next[1]);
    end
    checks++;
    if (stall_cycles == 0 || both_start == 0 || alt_ok != both_start) begin
      failures++;
      $display("FAIL: stalls=%0d simultaneous starts=%0d alternated=%0d", stall_cycles, both_start, alt_ok);
    end
    $display("stall cycles %0d, simultaneous starts %0d", stall_cycles, both_start);
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
