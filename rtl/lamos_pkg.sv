// lamos_pkg -- constants and types shared by the Barrett modular multiplier.
//
// The CiM macro geometry (64 rows x 256 columns, 32 lanes of 8-bit words, a
// 21-bit MAC result) follows the paper.  The phase encoding and the
// accumulator-control struct are this design's own: the struct carries, one
// cycle behind the macro inputs, the information the accumulator needs to
// place a macro result (which slot of a row band, whether this is the first
// or last workload group of that band, and the output chunk index).
package lamos_pkg;

  localparam int unsigned DIGIT_W    = 8;    // operand digit (one SRAM word)
  localparam int unsigned MACRO_ROWS = 64;   // rows of one CiM macro
  localparam int unsigned LANES      = 32;   // 8-bit words per macro row (256 columns)
  localparam int unsigned ROW_W      = LANES * DIGIT_W;
  localparam int unsigned MAC_W      = 2 * DIGIT_W + $clog2(LANES);  // 8+8+log2(32) = 21

  // Which of the three Barrett multiplications is running.
  typedef enum logic [1:0] {
    PH_AB = 2'd0,   // C = A * B
    PH_QM = 2'd1,   // u = floor(C / 2^(n-1)) * M'
    PH_EM = 2'd2    // P = E * M
  } mul_phase_e;

  // Control word that travels with one batch of macro results.
  typedef struct packed {
    logic        valid;   // macro results present this cycle
    logic        first;   // first workload group of the row band
    logic        last;    // last workload group of the row band
    logic        final_;  // last batch of the whole multiplication
    logic [7:0]  slot;    // batch index inside the band (0 .. 32/K-1)
    logic [15:0] chunk;   // output chunk index (chunk = 8K product bits)
  } acc_ctl_t;

  // Width of the weighted sum of K macro results (macro k weighted by 2^(8k)).
  function automatic int unsigned tree_w(input int unsigned k);
    return (k == 1) ? MAC_W : MAC_W + DIGIT_W * (k - 1) + 1;
  endfunction

endpackage
