// fhecore_unit: one FHECore functional unit executing FHEC.16816,
//   D[r][c] = (sum_k A[r][k] * B[k][c] + C[r][c]) mod q[c],
// with A 16x16, B 16x8, C and D 16x8, 32-bit residues, one modulus per
// output column.
//
// Like a Tensor Core, the unit only talks to the register file. An operation
// arrives as a burst of 17 beats on the register read port and its result
// leaves as 4 beats on the write port. A beat is 32 words of 32 bits (one
// warp register). Beat order of a read burst:
//   beat 0       : words 0..7 = q[0..7], words 8..15 = mu[0..7]
//   beats 1..8   : A, row-major, 32 words per beat (two rows of 16)
//   beats 9..12  : B, row-major over k, 32 words per beat (four rows of 8)
//   beats 13..16 : C, row-major, 32 words per beat (four rows of 8); last=1
// Write burst: beats 0..3 carry D row-major, 32 words each, last on beat 3.
// The Barrett shift k = 2*bitlen(q) is derived here from q when the
// configuration beat arrives, so software supplies only q and
// mu = floor(2^k / q), the two values fhe_sync takes.
//
// Timing: after the cycle in which the last read beat is accepted the unit
// runs the array for exactly 44 cycles (2*S_R + S_C + T - 2); the first
// write beat is offered in the next cycle. During the run the feeder skews
// the operands: row r of A enters the array r cycles late, column c of B
// c cycles late. C is loaded into the accumulators in the first run cycle.
// A new burst is accepted only once the previous result has been written.
//
// From the paper: the operation shape, per-column moduli, the 44-cycle run
// and the register-file-only interface. This design's own: the beat width,
// the beat order, the serial load/run/write sequencing and the on-unit
// operand buffers that stand in for the register-file operand collector.
module fhecore_unit
  import fhecore_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  // register-file read port (operands)
  input  logic  rd_valid,
  output logic  rd_ready,
  input  beat_t rd_beat,
  // register-file write port (result)
  output logic  wr_valid,
  input  logic  wr_ready,
  output beat_t wr_beat,
  // status
  output logic  busy,
  output logic  mmm_done      // one cycle, when all accumulators are final
);

  typedef enum logic [1:0] {S_LOAD, S_RUN, S_WB} state_e;

  localparam int unsigned BCW = $clog2(RD_BEATS);
  localparam int unsigned SW  = $clog2(MMM_CYCLES);
  localparam int unsigned WBW = $clog2(WR_BEATS);

  state_e          state;
  logic [BCW-1:0]  beat_cnt;
  logic [SW-1:0]   step;
  logic [WBW-1:0]  wb_cnt;

  modcfg_t cfg_q [COLS];
  word_t   a_buf [ROWS][KDIM];
  word_t   b_buf [KDIM][COLS];
  word_t   c_buf [ROWS][COLS];

  word_t   h_in  [ROWS];
  logic    h_vld [ROWS];
  word_t   v_in  [COLS];
  logic    v_vld [COLS];
  word_t   acc   [ROWS][COLS];
  logic    acc_load;

  wire rd_fire = rd_valid && rd_ready;
  wire wr_fire = wr_valid && wr_ready;

  assign rd_ready = (state == S_LOAD);
  assign busy     = (state != S_LOAD) || (beat_cnt != '0);
  assign acc_load = (state == S_RUN) && (step == '0);
  assign mmm_done = (state == S_RUN) && (step == SW'(MMM_CYCLES - 1));

  // ---------------------------------------------------------------- control
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_LOAD;
      beat_cnt <= '0;
      step     <= '0;
      wb_cnt   <= '0;
    end else begin
      unique case (state)
        S_LOAD: if (rd_fire) begin
          if (beat_cnt == BCW'(RD_BEATS - 1)) begin
            beat_cnt <= '0;
            step     <= '0;
            state    <= S_RUN;
          end else begin
            beat_cnt <= beat_cnt + 1'b1;
          end
        end
        S_RUN: begin
          if (mmm_done) begin
            wb_cnt <= '0;
            state  <= S_WB;
          end else begin
            step <= step + 1'b1;
          end
        end
        S_WB: if (wr_fire) begin
          if (wb_cnt == WBW'(WR_BEATS - 1)) state <= S_LOAD;
          wb_cnt <= wb_cnt + 1'b1;
        end
        default: state <= S_LOAD;
      endcase
    end
  end

  // ------------------------------------------------------- operand capture
  always_ff @(posedge clk) begin
    if (rd_fire) begin
      for (int w = 0; w < LANES; w++) begin
        int unsigned idx;
        if (beat_cnt == '0) begin
          if (w < COLS) begin
            cfg_q[w].q <= rd_beat.data[w];
            cfg_q[w].k <= barrett_k(rd_beat.data[w]);
          end else if (w < 2*COLS) begin
            cfg_q[w-COLS].mu <= rd_beat.data[w];
          end
        end else if (beat_cnt <= BCW'(A_BEATS)) begin
          idx = (int'(beat_cnt) - 1) * LANES + w;
          a_buf[idx / KDIM][idx % KDIM] <= rd_beat.data[w];
        end else if (beat_cnt <= BCW'(A_BEATS + B_BEATS)) begin
          idx = (int'(beat_cnt) - 1 - A_BEATS) * LANES + w;
          b_buf[idx / COLS][idx % COLS] <= rd_beat.data[w];
        end else begin
          idx = (int'(beat_cnt) - 1 - A_BEATS - B_BEATS) * LANES + w;
          c_buf[idx / COLS][idx % COLS] <= rd_beat.data[w];
        end
      end
    end
  end

  // ------------------------------------------------------------ skew feeder
  always_comb begin
    for (int r = 0; r < ROWS; r++) begin
      int d;
      d        = int'(step) - r;
      h_vld[r] = (state == S_RUN) && (d >= 0) && (d < KDIM);
      h_in[r]  = h_vld[r] ? a_buf[r][d[$clog2(KDIM)-1:0]] : '0;
    end
    for (int c = 0; c < COLS; c++) begin
      int d;
      d        = int'(step) - c;
      v_vld[c] = (state == S_RUN) && (d >= 0) && (d < KDIM);
      v_in[c]  = v_vld[c] ? b_buf[d[$clog2(KDIM)-1:0]][c] : '0;
    end
  end

  fhecore_array #(.R_N(ROWS), .C_N(COLS)) u_array (
    .clk      (clk),
    .rst_n    (rst_n),
    .cfg      (cfg_q),
    .h_in     (h_in),
    .h_vld    (h_vld),
    .v_in     (v_in),
    .v_vld    (v_vld),
    .acc_load (acc_load),
    .acc_init (c_buf),
    .acc      (acc)
  );

  // --------------------------------------------------------------- writeback
  always_comb begin
    wr_valid     = (state == S_WB);
    wr_beat.last = (wb_cnt == WBW'(WR_BEATS - 1));
    for (int w = 0; w < LANES; w++) begin
      int unsigned idx;
      idx = int'(wb_cnt) * LANES + w;
      wr_beat.data[w] = acc[idx / COLS][idx % COLS];
    end
  end

  // --------------------------------------------------------------- checks
  // The read burst of one operation is exactly RD_BEATS beats long.
  a_rd_last: assert property (@(posedge clk) disable iff (!rst_n)
    rd_fire |-> (rd_beat.last == (beat_cnt == BCW'(RD_BEATS - 1))));
  // A write beat, once offered, stays until it is taken.
  a_wr_hold: assert property (@(posedge clk) disable iff (!rst_n)
    wr_valid && !wr_ready |=> wr_valid && $stable(wr_beat));

endmodule
