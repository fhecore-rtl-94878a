// fhecore_array: the FHECore systolic array, a grid of R_N x C_N fhecore_pe
// (16 x 8 by default) in output-stationary dataflow.
//
// Row r receives its horizontal operand stream at the left edge and passes
// it right one PE per cycle; column c receives its vertical operand stream
// at the top edge and passes it down one PE per cycle. Every PE keeps its own
// output element in its accumulator. Each column has its own modulus and
// Barrett constants (cfg[c]), so one pass can reduce different output
// columns under different moduli, as base conversion needs; for an NTT all
// columns carry the same modulus.
//
// Timing: with the edge streams skewed (row r delayed by r cycles, column c
// by c cycles) the element of reduction index k meets in PE(r,c) in cycle
// r + c + k, and that PE's accumulator holds its final value six cycles
// after its last MAC. For R_N = 16, C_N = 8, K = 16 the last result is final
// in cycle 43 counted from the first operand at PE(0,0): 44 cycles, the
// paper's 2*S_R + S_C + T - 2. The skewing itself is done by the feeder in
// fhecore_unit.
//
// acc_load loads acc_init into all accumulators at once (operand C).
module fhecore_array
  import fhecore_pkg::*;
#(
  parameter int unsigned R_N = ROWS,
  parameter int unsigned C_N = COLS
) (
  input  logic    clk,
  input  logic    rst_n,
  input  modcfg_t cfg      [C_N],
  input  word_t   h_in     [R_N],
  input  logic    h_vld    [R_N],
  input  word_t   v_in     [C_N],
  input  logic    v_vld    [C_N],
  input  logic    acc_load,
  input  word_t   acc_init [R_N][C_N],
  output word_t   acc      [R_N][C_N]
);

  // h_bus[r][c] is the horizontal input of PE(r,c); column C_N is the
  // right-hand spill-out. v_bus[r][c] likewise for the vertical operand.
  word_t h_bus   [R_N][C_N+1];
  logic  h_vbus  [R_N][C_N+1];
  word_t v_bus   [R_N+1][C_N];
  logic  v_vbus  [R_N+1][C_N];

  for (genvar r = 0; r < R_N; r++) begin : g_left
    assign h_bus[r][0]  = h_in[r];
    assign h_vbus[r][0] = h_vld[r];
  end
  for (genvar c = 0; c < C_N; c++) begin : g_top
    assign v_bus[0][c]  = v_in[c];
    assign v_vbus[0][c] = v_vld[c];
  end

  for (genvar r = 0; r < R_N; r++) begin : g_row
    for (genvar c = 0; c < C_N; c++) begin : g_col
      fhecore_pe u_pe (
        .clk       (clk),
        .rst_n     (rst_n),
        .cfg       (cfg[c]),
        .h_in      (h_bus[r][c]),
        .h_vld_in  (h_vbus[r][c]),
        .h_out     (h_bus[r][c+1]),
        .h_vld_out (h_vbus[r][c+1]),
        .v_in      (v_bus[r][c]),
        .v_vld_in  (v_vbus[r][c]),
        .v_out     (v_bus[r+1][c]),
        .v_vld_out (v_vbus[r+1][c]),
        .acc_load  (acc_load),
        .acc_init  (acc_init[r][c]),
        .acc       (acc[r][c])
      );
    end
  end

endmodule
