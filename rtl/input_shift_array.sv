// input_shift_array -- builds the macro inputs for one batch of workload rows.
//
// The operand streamed through the macros (A, floor(C/2^(n-1)) or E) is held
// as T = n/8 digits.  Row r of the workload input stream, restricted to the
// 32-digit slice s of the stored operand, feeds lane j (the lane that holds
// stored digit 32s+j) with streamed digit r-32s-j, or 0 when that index lies
// outside 0..T-1.  With K macros working in parallel, macro k handles row
// r+k, so its lane j gets digit base+k-j where base = r - 32s.
//
// Structure: a barrel shifter turns the operand into a window of 32+K-1
// digits, W[i] = digit(base+K-1-i); macro k then takes W shifted by K-1-k
// digits.  The fixed per-macro shift is the chain of '<<' stages drawn after
// the input buffer; the barrel shifter lets the window jump to any workload
// group, which the grouping optimisation needs.  Purely combinational.
//
// The lane ordering (lane 0 holds the lowest digit, first cycle = a0 in lane
// 0) follows the input-stream figure; the window/barrel split is this
// design's own.
module input_shift_array
  import lamos_pkg::*;
#(
  parameter int unsigned T      = 256,  // operand digits (widest n / 8)
  parameter int unsigned K      = 2,    // parallel macros
  parameter int unsigned BASE_W = 12    // signed width of base
) (
  input  logic [T-1:0][DIGIT_W-1:0]              operand,
  input  logic signed [BASE_W-1:0]               base,
  output logic [K-1:0][LANES-1:0][DIGIT_W-1:0]   lanes
);

  localparam int unsigned WIN = LANES + K - 1;

  logic [WIN-1:0][DIGIT_W-1:0] window;

  // Barrel shifter: window digit i is operand digit base+K-1-i.
  always_comb begin
    for (int i = 0; i < WIN; i++) begin
      automatic int idx = int'(base) + int'(K) - 1 - i;
      window[i] = (idx >= 0 && idx < int'(T)) ? operand[idx] : '0;
    end
  end

  // Per-macro fixed shift: macro k lane j = window[K-1-k+j].
  always_comb begin
    for (int k = 0; k < int'(K); k++) begin
      for (int j = 0; j < int'(LANES); j++) begin
        lanes[k][j] = window[K-1-k+j];
      end
    end
  end

endmodule
