// operand_mux -- operand buffers, the '>>' shifters and the input MUX.
//
// On `load` the A buffer and the staging registers for B, M and M' capture the
// host operands.  The streamed operand of each multiplication is then chosen
// by `phase`:
//   PH_AB : A
//   PH_QM : the low n bits of floor(C / 2^(n-1))   (C from the C buffer)
//   PH_EM : E = floor(u / 2^(n+1)), low n bits     (u from the u buffer)
// n = 256*ns is the width of the running operation (ns = 1 .. N/256), so each
// shifter is a small mux of N/256 fixed shifts.  Digits above n are forced
// to zero.  The same block supplies the write driver: wr_sel picks B, the low
// n bits of M' or M, and wr_slice the 256-bit slice.
//
// floor(C/2^(n-1)) and M' are n+1 bits wide but a macro row slice holds n
// bits, so only their low n bits are streamed/stored; their top bits (q_top,
// mp_top) are handed to the distributor, which adds the missing partial
// products (see distributor).  This split is this design's own: the paper
// stores M' in the macro without saying how its (n+1)th bit is handled.
module operand_mux
  import lamos_pkg::*;
#(
  parameter int unsigned N = 2048
) (
  input  logic                           clk,
  input  logic                           load,
  input  logic [N-1:0]                   a_in,
  input  logic [N-1:0]                   b_in,
  input  logic [N-1:0]                   m_in,
  input  logic [N:0]                     mp_in,
  input  logic [$clog2(N/ROW_W+1)-1:0]   ns,
  input  mul_phase_e                     phase,
  input  logic [2*N-1:0]                 c_buf,
  input  logic [2*N+1:0]                 u_buf,
  output logic [N/DIGIT_W-1:0][DIGIT_W-1:0] operand,
  output logic [N-1:0]                   q_lo,       // low n bits of floor(C/2^(n-1))
  output logic                           q_top,      // bit n of floor(C/2^(n-1))
  output logic [N-1:0]                   m_q,
  output logic [N-1:0]                   mp_lo,      // low n bits of M'
  output logic                           mp_top,     // bit n of M'
  input  logic [1:0]                     wr_sel,     // 0: B, 1: M' (low n), 2: M
  input  logic [$clog2(N/ROW_W+1)-1:0]   wr_slice,
  output logic [ROW_W-1:0]               wr_data
);

  localparam int unsigned S = N / ROW_W;

  logic [N-1:0] a_buf, b_q;
  logic [N:0]   mp_q;
  logic [N-1:0] wr_word, mask, e_lo;

  always_ff @(posedge clk) begin
    if (load) begin
      a_buf <= a_in;
      b_q   <= b_in;
      m_q   <= m_in;
      mp_q  <= mp_in;
    end
  end

  // '>>' shifters (one fixed shift per supported width) and input MUX.
  always_comb begin
    mask   = '0;
    q_lo   = '0;
    e_lo   = '0;
    q_top  = 1'b0;
    mp_top = 1'b0;
    for (int unsigned s = 1; s <= S; s++) begin
      if (32'(ns) == s) begin
        mask   = {N{1'b1}} >> (N - ROW_W * s);
        q_lo   = N'(c_buf >> (ROW_W * s - 1)) & mask;
        e_lo   = N'(u_buf >> (ROW_W * s + 1)) & mask;
        q_top  = c_buf[2 * ROW_W * s - 1];
        mp_top = mp_q[ROW_W * s];
      end
    end
    mp_lo = mp_q[N-1:0] & mask;
    unique case (phase)
      PH_QM:   operand = q_lo;
      PH_EM:   operand = e_lo;
      default: operand = a_buf & mask;
    endcase
  end

  // Write-driver data.
  always_comb begin
    unique case (wr_sel)
      2'd1:    wr_word = mp_q[N-1:0];
      2'd2:    wr_word = m_q;
      default: wr_word = b_q;
    endcase
    wr_data = wr_word[wr_slice*ROW_W +: ROW_W];
  end

endmodule
