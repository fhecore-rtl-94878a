// tb_barrett_reduce: self-checking test of barrett_reduce.
//
// Streams one value per cycle through the reducer for a series of moduli
// (fixed edge cases and random ones of 2..31 bits) and compares each result
// with x % q computed by the simulator. Inputs are products of two residues,
// values just below 2^k, and, with mu lowered by one, the case where the
// final r - 2q leg is needed. Each result must appear exactly 4 cycles after
// its input (BR_LAT).
module tb_barrett_reduce;
  import fhecore_pkg::*;
  import fhecore_tb_pkg::*;

  logic    clk = 1'b0;
  logic    rst_n = 1'b0;
  modcfg_t cfg;
  logic    in_valid;
  dword_t  x;
  logic    out_valid;
  word_t   r;

  int checks = 0, failures = 0;
  longint cycle = 0;

  barrett_reduce dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  // scoreboard
  word_t  exp_q [$];
  longint exp_t [$];

  always @(posedge clk) begin
    if (rst_n && in_valid) begin
      exp_q.push_back(word_t'(u64'(x) % u64'(cfg.q)));
      exp_t.push_back(cycle + BR_LAT);
    end
    if (rst_n && out_valid) begin
      word_t  e;
      longint t;
      checks++;
      if (exp_q.size() == 0) begin
        failures++;
        $display("FAIL: unexpected output %0d", r);
      end else begin
        e = exp_q.pop_front();
        t = exp_t.pop_front();
        if (r !== e || t != cycle) begin
          failures++;
          if (failures < 10)
            $display("FAIL: q=%0d mu=%0d got %0d exp %0d (cycle %0d exp %0d)",
                     cfg.q, cfg.mu, r, e, cycle, t);
        end
      end
    end
  end

  task automatic run_modulus(input word_t q, input bit mu_low, input int n);
    word_t a, b;
    u64 kmax;
    cfg.q  = q;
    cfg.k  = barrett_k(q);
    cfg.mu = mu_ref(q) - (mu_low ? 1 : 0);
    kmax   = (u64'(1) << cfg.k) - 1;
    for (int i = 0; i < n; i++) begin
      @(negedge clk);
      in_valid = 1'b1;
      case (i % 4)
        0, 1: begin a = rand_res(q); b = rand_res(q); x = dword_t'(u64'(a) * u64'(b)); end
        2:    x = dword_t'(kmax - (u64'($urandom) % (u64'(q) + 1)));
        default: begin a = q - 1; b = q - 1 - word_t'(i % 2); x = dword_t'(u64'(a) * u64'(b)); end
      endcase
    end
    @(negedge clk);
    in_valid = 1'b0;
    repeat (BR_LAT + 2) @(negedge clk);   // drain before cfg changes
  endtask

  initial begin
    in_valid = 1'b0;
    x = '0;
    cfg = '{q: 32'd3, mu: 32'd0, k: '0};
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    run_modulus(32'd2013265921, 1'b0, 200);   // 15*2^27+1
    run_modulus(32'd998244353,  1'b0, 200);   // 119*2^23+1
    run_modulus(32'h7fffffff,   1'b0, 200);
    run_modulus(32'd3,          1'b0, 40);
    run_modulus(32'd2,          1'b0, 40);
    run_modulus(32'd2013265921, 1'b1, 200);
    run_modulus(32'd65537,      1'b1, 200);
    for (int m = 0; m < 40; m++) run_modulus(rand_q(), m % 3 == 0, 60);
    if (exp_q.size() != 0) begin
      failures++;
      $display("FAIL: %0d results never appeared", exp_q.size());
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
