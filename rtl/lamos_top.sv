// lamos_top -- Barrett modular multiplier R = A*B mod M on K SRAM
// compute-in-memory MAC macros.
//
// Operation: with ready high, pulse start with nslices = n/256 (the operand
// width of this operation, 1 .. N/256), A, B (n bits, < M), M (n bits,
// 2^(n-1) < M < 2^n) and M' = floor(2^(2n)/M) (n+1 bits, computed by the
// host); all bits above n (n+1 for M') must be zero.  The operands are
// captured on that edge and need not be held.  done pulses for one cycle
// when r holds the result; r stays valid until the next operation finishes.
// Latency: 3S + 3L + 5 cycles with S = nslices and L = S(S+1) * 32/K
// (104 / 299 / 977 / 3485 cycles for n = 256 / 512 / 1024 / 2048, K = 2).
//
// Datapath: the operand mux streams A, floor(C/2^(n-1)) or E through the
// input shift array into the K macros, which hold B, M' and M in their rows.
// The macro adder tree and the group accumulator turn the MAC results into a
// 2n-bit product, which the distributor sends to the C buffer, the u buffer
// or the final subtractors.  The controller schedules everything.
//
// Defaults follow the paper's evaluated configuration: two 64x256 macros
// serving every width from 256 to 2048 bits.  N must be a multiple of 256
// (at most 5376 so that B, M' and M fit the 64 macro rows) and K must
// divide 32.
module lamos_top
  import lamos_pkg::*;
#(
  parameter int unsigned N = 2048,  // widest operand in bits
  parameter int unsigned K = 2      // number of CiM MAC macros
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic [$clog2(N/256+1)-1:0] nslices,
  output logic         ready,
  input  logic [N-1:0] a,
  input  logic [N-1:0] b,
  input  logic [N-1:0] m,
  input  logic [N:0]   mp,
  output logic [N-1:0] r,
  output logic         done
);

  localparam int unsigned T      = N / DIGIT_W;
  localparam int unsigned S      = N / ROW_W;
  localparam int unsigned BASE_W = $clog2(64 * S + 1) + 2;
  localparam int unsigned TW     = tree_w(K);
  localparam int unsigned RW     = $clog2(MACRO_ROWS);

  // controller outputs
  logic                       load, wr_en, mac_en, fix, sub_en;
  logic [RW-1:0]              wr_row, mac_row;
  logic [1:0]                 wr_sel;
  logic [$clog2(S+1)-1:0]     wr_slice;
  logic signed [BASE_W-1:0]   base;
  mul_phase_e                 phase;
  acc_ctl_t                   acc_ctl;

  // datapath
  logic [T-1:0][DIGIT_W-1:0]           operand;
  logic [K-1:0][LANES-1:0][DIGIT_W-1:0] lanes;
  logic [ROW_W-1:0]                    wr_data;
  logic [K-1:0][MAC_W-1:0]             mac_out;
  logic [K-1:0]                        mac_valid;
  logic [TW-1:0]                       tree_sum;
  logic [2*N-1:0]                      result_d;
  logic                                prod_done;
  logic [2*N-1:0]                      c_buf, p_buf;
  logic [2*N+1:0]                      u_buf;
  logic                                p_valid, q_top, mp_top;
  logic [N-1:0]                        m_q, q_lo, mp_lo;
  logic [$clog2(S+1)-1:0]              ns;

  lamos_controller #(.N(N), .K(K), .BASE_W(BASE_W)) u_ctrl (
    .clk, .rst_n, .start, .nslices, .ready, .ns, .load,
    .wr_en, .wr_row, .wr_sel, .wr_slice,
    .mac_en, .mac_row, .base, .phase,
    .acc_ctl, .fix, .sub_en
  );

  operand_mux #(.N(N)) u_opmux (
    .clk, .load,
    .a_in(a), .b_in(b), .m_in(m), .mp_in(mp),
    .ns, .phase, .c_buf, .u_buf,
    .operand, .q_lo, .q_top, .m_q, .mp_lo, .mp_top,
    .wr_sel, .wr_slice, .wr_data
  );

  input_shift_array #(.T(T), .K(K), .BASE_W(BASE_W)) u_shift (
    .operand, .base, .lanes
  );

  for (genvar k = 0; k < K; k++) begin : g_macro
    cim_macro u_macro (
      .clk, .rst_n,
      .wr_en, .wr_row, .wr_data,
      .mac_en, .mac_row, .mac_in(lanes[k]),
      .mac_out(mac_out[k]), .mac_valid(mac_valid[k])
    );
  end

  macro_adder_tree #(.K(K)) u_tree (
    .v(mac_out), .sum(tree_sum)
  );

  group_accumulator #(.N(N), .K(K)) u_acc (
    .clk, .rst_n,
    .ctl(acc_ctl), .in_sum(tree_sum),
    .result_q(), .result_d, .done_d(prod_done)
  );

  distributor #(.N(N)) u_dist (
    .clk, .rst_n,
    .phase, .fire(prod_done), .product(result_d),
    .fix, .ns, .q_lo, .q_top, .mp_lo, .mp_top,
    .c_buf, .u_buf, .p_buf, .p_valid
  );

  final_subtractors #(.N(N)) u_sub (
    .clk, .rst_n,
    .en(sub_en), .c(c_buf), .p(p_buf), .m(m_q),
    .r, .r_valid(done)
  );

  // The accumulator control travels one cycle behind the macro inputs,
  // exactly as the macro results do.
  a_ctl_aligned: assert property (@(posedge clk) disable iff (!rst_n)
                                  acc_ctl.valid == &mac_valid);
  a_sub_after_p: assert property (@(posedge clk) disable iff (!rst_n)
                                  sub_en |-> p_valid);

endmodule
