// barrett_reduce: pipelined Barrett reduction, r = x mod q.
//
// The stages follow the Barrett reduction pipeline drawn next to the PE:
// multiply by mu, shift right by k, multiply by q, subtract from x, then
// choose between r, r - q and r - 2q.
//   stage 1: p = x * mu
//   stage 2: t = p >> k, tq = t * q
//   stage 3: r = x - tq            (0 <= r < 3q)
//   stage 4: r = the one of {r, r-q, r-2q} that lies in [0, q)
// With k = 2*bitlen(q), mu = floor(2^k / q) and x < 2^k (true for any
// product of two residues below q) the estimate t is at most one below
// floor(x/q), so r < 2q; the r - 2q leg of the final selector covers a mu
// that software rounded one low. How the pipeline is cut into four stages,
// and the choice of k, are this design's own; the paper gives the operator
// chain but not the register boundaries or the width of k and mu.
//
// Interface: x and in_valid are sampled every clock; r/out_valid appear
// BR_LAT (4) cycles later, one result per cycle. cfg (q, mu, k) is not
// pipelined and must stay constant while values are in flight, which is how
// the PE columns hold their programmed modulus for a whole operation.
// Requirements: 2 <= q < 2^31, x < 2^k.
module barrett_reduce
  import fhecore_pkg::*;
(
  input  logic    clk,
  input  logic    rst_n,
  input  modcfg_t cfg,
  input  logic    in_valid,
  input  dword_t  x,
  output logic    out_valid,
  output word_t   r
);

  localparam int unsigned RW = W + 2;   // width holding values below 3q < 2^33

  logic [BR_LAT-1:0] vld;
  // stage 1
  dword_t            x1;
  logic [3*W-1:0]    p1;
  // stage 2
  dword_t            x2;
  dword_t            tq2;
  // stage 3
  logic [RW-1:0]     r3;

  logic [W+1:0]      t_c;
  logic [RW:0]       d1, d2;   // r - q and r - 2q with a sign bit

  always_comb begin
    t_c    = (W+2)'(p1 >> cfg.k);
    d1     = {1'b0, r3} - {2'b00, cfg.q};
    d2     = {1'b0, r3} - {1'b0, cfg.q, 1'b0};
  end

  always_ff @(posedge clk) begin
    // stage 1: x * mu
    x1  <= x;
    p1  <= x * {{W{1'b0}}, cfg.mu};
    // stage 2: (p >> k) * q
    x2  <= x1;
    tq2 <= dword_t'(t_c * cfg.q);
    // stage 3: x - t*q
    r3  <= RW'(x2 - tq2);
    // stage 4: pick r, r - q or r - 2q
    if (!d2[RW])      r <= word_t'(d2);
    else if (!d1[RW]) r <= word_t'(d1);
    else              r <= word_t'(r3);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) vld <= '0;
    else        vld <= {vld[BR_LAT-2:0], in_valid};
  end

  assign out_valid = vld[BR_LAT-1];

endmodule
