// group_accumulator -- turns the stream of per-cycle MAC sums into the
// 2n-bit product (adder, temp register, result register of the paper).
//
// Every cycle the adder tree delivers in_sum, the weighted sum of K workload
// rows, i.e. K output digits plus carry bits.  The carry adder adds the value
// held in the temp register; the low 8K bits are final product bits and are
// written to chunk `chunk` of the result register, the high bits go back to
// the temp register for the next chunk (its weight is exactly 2^(8K) higher).
// With K = 1 this is the paper's 21-bit MAC / low 8 bits / 14-bit temp scheme.
//
// Workload grouping (n > 256): a row band of 32 workload rows can receive
// results from several 32-digit slices of the stored operand, one workload
// group per slice.  The groups of a band run back to back; all but the last
// are summed per slot into the band buffer, and the last one adds the band
// buffer entry and passes the total to the carry adder.  For n = 256 every
// band has one group and the band buffer is never used.
//
// The register is sized for the widest operand (2N bits).  The first batch
// of every multiplication (chunk 0) clears it, so that for a narrower
// operation the chunks above 2n read as zero.
//
// Interface: ctl (see lamos_pkg::acc_ctl_t) arrives with in_sum.  result_d is
// the next value of the result register, and done_d is high in the cycle the
// last chunk of a multiplication is written, so a consumer can capture the
// complete product at the same clock edge as the result register.
//
// The carry scheme follows the paper.  The band buffer and the control
// encoding are this design's own: the paper does not say how groups that
// share output rows are combined.
module group_accumulator
  import lamos_pkg::*;
#(
  parameter int unsigned N = 2048,                // operand bits
  parameter int unsigned K = 2,                   // parallel macros
  parameter int unsigned IN_W = tree_w(K)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  acc_ctl_t        ctl,
  input  logic [IN_W-1:0] in_sum,
  output logic [2*N-1:0]  result_q,
  output logic [2*N-1:0]  result_d,
  output logic            done_d
);

  localparam int unsigned S      = N / ROW_W;                  // operand slices
  localparam int unsigned SLOTS  = LANES / K;                  // batches per band
  localparam int unsigned CHUNK  = DIGIT_W * K;                // product bits per batch
  localparam int unsigned NCHUNK = 2 * N / CHUNK;
  localparam int unsigned BB_W   = IN_W + $clog2(S) + 1;       // band-sum width
  localparam int unsigned SUM_W  = BB_W + 1;                   // carry-adder width
  localparam int unsigned TMP_W  = SUM_W - CHUNK;
  localparam int unsigned SL_W   = (SLOTS > 1) ? $clog2(SLOTS) : 1;

  logic [BB_W-1:0]  band_buf [SLOTS];
  logic [TMP_W-1:0] temp_q;
  logic [BB_W-1:0]  band_total;
  logic [SUM_W-1:0] acc_sum;
  logic [TMP_W-1:0] carry_in;
  logic [SL_W-1:0]  slot_idx;

  assign slot_idx = ctl.slot[SL_W-1:0];

  always_comb begin
    band_total = (ctl.first ? '0 : band_buf[slot_idx]) + BB_W'(in_sum);
    carry_in   = (ctl.chunk == '0) ? '0 : temp_q;
    acc_sum    = SUM_W'(band_total) + SUM_W'(carry_in);
    result_d   = result_q;
    // The first batch of a multiplication clears the whole register, so that
    // chunks above 2n (narrower operation than the widest) read as zero.
    if (ctl.valid && ctl.last && ctl.chunk == '0) result_d = '0;
    if (ctl.valid && ctl.last) begin
      result_d[ctl.chunk*CHUNK +: CHUNK] = acc_sum[CHUNK-1:0];
    end
    done_d = ctl.valid && ctl.last && ctl.final_;
  end

  // Band buffer: partial sums of the groups of one band.
  always_ff @(posedge clk) begin
    if (ctl.valid && !ctl.last) band_buf[slot_idx] <= band_total;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      temp_q   <= '0;
      result_q <= '0;
    end else begin
      result_q <= result_d;
      if (ctl.valid && ctl.last) temp_q <= acc_sum[SUM_W-1:CHUNK];
    end
  end

  // The product of two n-bit numbers fits in 2n bits: nothing may be left in
  // the temp register after the last chunk.
  a_no_carry_out: assert property (@(posedge clk) disable iff (!rst_n)
                                   done_d |-> acc_sum[SUM_W-1:CHUNK] == '0);
  a_chunk_range:  assert property (@(posedge clk) disable iff (!rst_n)
                                   ctl.valid |-> (32'(ctl.chunk) < NCHUNK) && (32'(ctl.slot) < SLOTS));

endmodule
