// fhecore_pe: one output-stationary modulo multiply-accumulate PE.
//
// Computes R <- (R + h * v) mod q, where h is the operand that travels
// horizontally along a PE row and v the one that travels vertically down a
// PE column. Both operands (with their valid bits) are registered and
// forwarded to the right and downward neighbours every cycle, so the array
// never waits on a PE's internal pipeline. The running sum R stays in the
// PE's accumulator register.
//
// Six pipeline stages, one MAC accepted per cycle:
//   stage 1      : 64-bit product h * v
//   stages 2..5  : Barrett reduction of the product (barrett_reduce)
//   stage 6      : modular accumulate, R + p >= q ? R + p - q : R + p
// A MAC sampled in cycle c is visible in acc in cycle c + 6. The six-stage
// depth, the multiplier / Barrett / accumulator order and the forwarding of
// both operands follow the paper; the split of the stages is this design's.
//
// acc_load (one cycle, with no MAC in flight) loads acc_init into the
// accumulator; this is how the C operand of D = A*B + C enters.
// Operands and acc_init must be below q; cfg stays fixed during an operation.
module fhecore_pe
  import fhecore_pkg::*;
(
  input  logic    clk,
  input  logic    rst_n,
  input  modcfg_t cfg,
  // horizontal operand (from the left neighbour / row feeder)
  input  word_t   h_in,
  input  logic    h_vld_in,
  output word_t   h_out,
  output logic    h_vld_out,
  // vertical operand (from the upper neighbour / column feeder)
  input  word_t   v_in,
  input  logic    v_vld_in,
  output word_t   v_out,
  output logic    v_vld_out,
  // accumulator
  input  logic    acc_load,
  input  word_t   acc_init,
  output word_t   acc
);

  // operand forwarding registers
  always_ff @(posedge clk) begin
    h_out <= h_in;
    v_out <= v_in;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      h_vld_out <= 1'b0;
      v_vld_out <= 1'b0;
    end else begin
      h_vld_out <= h_vld_in;
      v_vld_out <= v_vld_in;
    end
  end

  // stage 1: multiplier
  dword_t prod;
  logic   prod_vld;

  always_ff @(posedge clk) prod <= dword_t'(h_in) * dword_t'(v_in);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) prod_vld <= 1'b0;
    else        prod_vld <= h_vld_in & v_vld_in;
  end

  // stages 2..5: Barrett reduction
  word_t red;
  logic  red_vld;

  barrett_reduce u_barrett (
    .clk       (clk),
    .rst_n     (rst_n),
    .cfg       (cfg),
    .in_valid  (prod_vld),
    .x         (prod),
    .out_valid (red_vld),
    .r         (red)
  );

  // stage 6: modular accumulate
  logic [W:0] sum;
  logic [W:0] sum_m_q;

  always_comb begin
    sum     = {1'b0, acc} + {1'b0, red};
    sum_m_q = sum - {1'b0, cfg.q};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)        acc <= '0;
    else if (acc_load) acc <= acc_init;
    else if (red_vld)  acc <= sum_m_q[W] ? word_t'(sum) : word_t'(sum_m_q);
  end

  // A load must not collide with a result that is being accumulated.
  a_no_load_during_mac: assert property (@(posedge clk) disable iff (!rst_n)
    !(acc_load && red_vld));

endmodule
