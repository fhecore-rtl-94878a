// tb_fhecore_pe: self-checking test of one fhecore_pe.
//
// For a series of moduli it loads a random initial value C, streams a dot
// product of random length (1..24 terms) one term per cycle, sometimes with
// idle cycles in between, and checks
//   - the accumulator against (C + sum h*v) mod q computed by the simulator,
//   - that the final value appears exactly 6 cycles after the last term is
//     sampled (and not one cycle earlier),
//   - that both operands and their valid bits are forwarded with one cycle
//     of delay.
module tb_fhecore_pe;
  import fhecore_pkg::*;
  import fhecore_tb_pkg::*;

  logic    clk = 1'b0;
  logic    rst_n = 1'b0;
  modcfg_t cfg;
  word_t   h_in, v_in, h_out, v_out, acc_init, acc;
  logic    h_vld_in, v_vld_in, h_vld_out, v_vld_out, acc_load;

  int checks = 0, failures = 0;

  fhecore_pe dut (.*);

  always #5 clk = ~clk;

  // forwarding check
  word_t h_d, v_d;
  logic  hv_d, vv_d;
  always @(posedge clk) begin
    if (rst_n) begin
      #1;
      checks++;
      if (h_out !== h_d || v_out !== v_d || h_vld_out !== hv_d || v_vld_out !== vv_d) begin
        failures++;
        $display("FAIL: forwarding mismatch");
      end
    end
  end
  always @(posedge clk) begin
    h_d <= h_in; v_d <= v_in; hv_d <= h_vld_in; vv_d <= v_vld_in;
  end

  task automatic one_dot(input word_t q, input int n, input bit gaps);
    word_t expv, prevv;
    cfg.q  = q;
    cfg.k  = barrett_k(q);
    cfg.mu = mu_ref(q);
    @(negedge clk);
    acc_load = 1'b1;
    acc_init = rand_res(q);
    expv     = acc_init;
    @(negedge clk);
    acc_load = 1'b0;
    for (int i = 0; i < n; i++) begin
      if (gaps && ($urandom % 3 == 0)) begin
        h_vld_in = 1'b0; v_vld_in = 1'b0;
        h_in = $urandom; v_in = $urandom;   // garbage while invalid
        @(negedge clk);
      end
      h_in = rand_res(q);
      v_in = rand_res(q);
      h_vld_in = 1'b1;
      v_vld_in = 1'b1;
      prevv = expv;
      expv = addmod(expv, mulmod(h_in, v_in, q), q);
      @(negedge clk);
    end
    h_vld_in = 1'b0;
    v_vld_in = 1'b0;
    // last term was sampled on the previous rising edge (cycle c); its sum
    // must be visible from cycle c+6: in cycle c+5 the accumulator still
    // holds the sum without the last term, in cycle c+6 the full sum.
    repeat (4) @(negedge clk);
    checks++;
    if (acc !== prevv) begin
      failures++;
      $display("FAIL: q=%0d accumulator not at n-1 terms in cycle c+5", q);
    end
    @(negedge clk);
    checks++;
    if (acc !== expv) begin
      failures++;
      $display("FAIL: q=%0d n=%0d acc=%0d exp=%0d", q, n, acc, expv);
    end
  endtask

  initial begin
    cfg = '{q: 32'd17, mu: 32'd0, k: '0};
    h_in = '0; v_in = '0; h_vld_in = 1'b0; v_vld_in = 1'b0;
    acc_load = 1'b0; acc_init = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    one_dot(32'd2013265921, 16, 1'b0);
    one_dot(32'd998244353, 16, 1'b1);
    one_dot(32'h7fffffff, 24, 1'b0);
    one_dot(32'd5, 16, 1'b1);
    for (int m = 0; m < 60; m++) one_dot(rand_q(), 1 + ($urandom % 24), m % 2 == 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
