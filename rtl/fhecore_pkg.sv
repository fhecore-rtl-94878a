// fhecore_pkg: types and constants shared by the FHECore RTL.
//
// FHECore is a modulo matrix-multiply functional unit that sits beside the
// Tensor Cores of a GPU streaming multiprocessor. It executes one
// FHEC.16816 operation, D = (A x B + C) mod q, with A 16x16, B 16x8 and
// C/D 16x8, on a 16x8 output-stationary systolic array of 32-bit modulo
// multiply-accumulate PEs, each six pipeline stages deep.
//
// The array shape, operand width, PE depth and the number of units per SM
// follow the paper's figures and text. The register-port beat (32 lanes of
// 32 bits, one warp register), the beat order of an operation and the
// modulus limit (q below 2^31 so that mu fits a 32-bit register) are this
// design's own choices.
package fhecore_pkg;

  // Operand / modulus word width (32-bit operands).
  parameter int unsigned W       = 32;
  // Systolic array: 16 rows x 8 columns, reduction depth 16 (16x8x16 MMA).
  parameter int unsigned ROWS    = 16;
  parameter int unsigned COLS    = 8;
  parameter int unsigned KDIM    = 16;
  // Pipeline depth of one PE (multiplier, four Barrett stages, accumulator).
  parameter int unsigned PE_LAT  = 6;
  // Barrett reduction pipeline depth inside the PE.
  parameter int unsigned BR_LAT  = 4;
  // FHECore units per SM: as many as Tensor Cores (four on an A100 SM).
  parameter int unsigned NUM_FC  = 4;
  // Words carried by one register-file port beat (one 32-thread warp register).
  parameter int unsigned LANES   = 32;
  // Width of the Barrett shift amount k (k <= 62).
  parameter int unsigned KW      = 7;

  typedef logic [W-1:0]   word_t;
  typedef logic [2*W-1:0] dword_t;

  // Barrett constants of one modulus: q, mu = floor(2^k / q), k = 2*bitlen(q).
  typedef struct packed {
    word_t         q;
    word_t         mu;
    logic [KW-1:0] k;
  } modcfg_t;

  // One register-file port beat.
  typedef struct packed {
    logic                   last;
    word_t [LANES-1:0]      data;
  } beat_t;

  // Which functional unit a read burst on a shared register port belongs to.
  typedef enum logic {DST_TC = 1'b0, DST_FC = 1'b1} dst_e;

  // Cycles from the first operand entering the array to all 128 results
  // being final: 2*S_R + S_C + T - 2 (44 for the 16x8 array with T = 6).
  parameter int unsigned MMM_CYCLES = 2*ROWS + COLS + PE_LAT - 2;

  // Beats of one FHEC operation on the register port.
  parameter int unsigned CFG_BEATS = 1;                     // q[8], mu[8]
  parameter int unsigned A_BEATS   = ROWS*KDIM/LANES;       // 8
  parameter int unsigned B_BEATS   = KDIM*COLS/LANES;       // 4
  parameter int unsigned C_BEATS   = ROWS*COLS/LANES;       // 4
  parameter int unsigned RD_BEATS  = CFG_BEATS + A_BEATS + B_BEATS + C_BEATS;
  parameter int unsigned WR_BEATS  = ROWS*COLS/LANES;       // 4

  // Bit length of a value (position of its leading one, plus one).
  function automatic logic [KW-1:0] bitlen(input word_t v);
    logic [KW-1:0] n;
    n = '0;
    for (int i = 0; i < W; i++) begin
      if (v[i]) n = KW'(i + 1);
    end
    return n;
  endfunction

  // Barrett shift amount for modulus q: k = 2 * bitlen(q).
  function automatic logic [KW-1:0] barrett_k(input word_t q);
    return KW'(2 * bitlen(q));
  endfunction

endpackage
