// distributor -- routes each finished product and holds the C and u buffers.
//
// When the accumulator finishes a multiplication (fire), the product is
// steered by phase:
//   PH_AB : C  -> C buffer
//   PH_QM : u  -> u buffer (raw CiM product, completed by `fix`, see below)
//   PH_EM : P  -> P register feeding the subtractors (p_valid pulses)
//
// Leading-bit completion of u.  The macros multiply only n-bit slices, but
// q = floor(C/2^(n-1)) = q_lo + q_top*2^n and M' = M'_lo + m_top*2^n are n+1
// bits.  The CiM computes q_lo*M'_lo; in the `fix` cycle this block adds
//   2^n * (q_top*M'_lo + m_top*q_lo + q_top*m_top*2^n)
// so that the u buffer holds the exact q*M'.  This completion is this
// design's own addition; the paper treats both factors as fitting the macro.
// The inputs q_lo, q_top, mp_lo and mp_top come from the operand mux; the
// shift by n is a mux of the N/256 widths the design supports (n = 256*ns).
//
// Timing: buffers load on the clock edge at which fire is high, so the next
// multiplication can read them in the following cycle.
module distributor
  import lamos_pkg::*;
#(
  parameter int unsigned N = 2048
) (
  input  logic             clk,
  input  logic             rst_n,
  input  mul_phase_e       phase,
  input  logic             fire,
  input  logic [2*N-1:0]   product,
  input  logic             fix,
  input  logic [$clog2(N/ROW_W+1)-1:0] ns,
  input  logic [N-1:0]     q_lo,
  input  logic             q_top,
  input  logic [N-1:0]     mp_lo,
  input  logic             mp_top,
  output logic [2*N-1:0]   c_buf,
  output logic [2*N+1:0]   u_buf,
  output logic [2*N-1:0]   p_buf,
  output logic             p_valid
);

  localparam int unsigned S = N / ROW_W;

  logic [N+1:0]   corr;
  logic [2*N+1:0] corr_sh;

  always_comb begin
    corr    = (q_top ? (N+2)'(mp_lo) : '0)
            + (mp_top ? (N+2)'(q_lo) : '0)
            + ((q_top && mp_top) ? (N+2)'(1) << (ROW_W * 32'(ns)) : '0);
    corr_sh = '0;
    for (int unsigned s = 1; s <= S; s++)
      if (32'(ns) == s) corr_sh = (2*N+2)'(corr) << (ROW_W * s);
  end

  always_ff @(posedge clk) begin
    if (fire && phase == PH_AB) c_buf <= product;
    if (fire && phase == PH_QM) u_buf <= (2*N+2)'(product);
    else if (fix)               u_buf <= u_buf + corr_sh;
    if (fire && phase == PH_EM) p_buf <= product;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) p_valid <= 1'b0;
    else        p_valid <= fire && (phase == PH_EM);
  end

  a_fix_alone: assert property (@(posedge clk) disable iff (!rst_n) fix |-> !fire);

endmodule
