// lamos_controller -- sequences one Barrett modular multiplication.
//
// Handshake: when ready is high, a start pulse loads the operands (load),
// captures the operation width nslices (n = 256*nslices, 1 .. N/256, passed
// on as ns) and begins an operation; start is ignored while busy.
//
// Sequence and cycle budget (S = n/256 slices of the running operation,
// S_max = N/256, L cycles per multiplication):
//   WRITE  3S cycles  write B, M' (low n bits) and M into the macros, all
//                     macros at once (slice s of operand o -> row o*S_max+s)
//   MUL    L          C = A*B          (phase PH_AB, macro rows of B)
//   DRAIN  1          last macro results reach the accumulator, C captured
//   MUL    L          u = q*M'         (phase PH_QM, macro rows of M')
//   DRAIN  1          u captured
//   FIX    1          leading-bit completion of u
//   MUL    L          P = E*M          (phase PH_EM, macro rows of M)
//   DRAIN  1          P captured
//   SUB    1          final subtraction; result valid in the next cycle
// i.e. 3S + 3L + 5 cycles from the start edge to the edge that raises done.
//
// Workload grouping: the input stream of one multiplication has 2T-1 rows
// (T = n/8 digits), cut into 2S bands of 32 rows; each band meets S slices
// of the stored operand.  Group (band g, slice s) holds a non-zero digit only
// if 0 <= g-s <= S; all other groups are skipped.  A kept group takes 32/K
// cycles, macro k taking row 32g + K*slot + k.  So L = G * 32/K with
// G = S(S+1) (2 groups for n=256, 6 for 512, 20 for 1024, 72 for 2048).
//
// Follows the paper: B/M'/M stored in macro rows, the three multiplications
// in sequence, zero-only groups discarded, one row per macro per cycle.  The
// state machine, the group order (band by band, slices in increasing order)
// and the drain/fix cycles are this design's own; with them the cycle count
// equals the paper's reported counts (104 cycles at n = 256, K = 2).
module lamos_controller
  import lamos_pkg::*;
#(
  parameter int unsigned N      = 2048,
  parameter int unsigned K      = 2,
  parameter int unsigned BASE_W = $clog2(64 * (N / ROW_W) + 1) + 2
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          start,
  input  logic [$clog2(N/ROW_W+1)-1:0]  nslices,    // operand width of this operation / 256
  output logic                          ready,
  output logic [$clog2(N/ROW_W+1)-1:0]  ns,         // nslices captured at start
  output logic                          load,
  // write driver
  output logic                          wr_en,
  output logic [$clog2(MACRO_ROWS)-1:0] wr_row,
  output logic [1:0]                    wr_sel,
  output logic [$clog2(N/ROW_W+1)-1:0]  wr_slice,
  // MAC issue
  output logic                          mac_en,
  output logic [$clog2(MACRO_ROWS)-1:0] mac_row,
  output logic signed [BASE_W-1:0]      base,
  output mul_phase_e                    phase,
  // accumulator control, aligned with the macro outputs
  output acc_ctl_t                      acc_ctl,
  // distributor / subtractors
  output logic                          fix,
  output logic                          sub_en
);

  localparam int unsigned S     = N / ROW_W;        // slices of the widest operand
  localparam int unsigned SLOTS = LANES / K;

  typedef enum logic [2:0] {
    ST_IDLE, ST_WRITE, ST_MUL, ST_DRAIN, ST_FIX, ST_SUB
  } state_e;

  state_e      state_q;
  mul_phase_e  phase_q;
  logic [7:0]  wsel_q, wslice_q;      // write pointer: operand, slice
  logic [7:0]  g_q, s_q, slot_q;      // band, slice, slot of the issued batch
  acc_ctl_t    ctl_d, ctl_q;
  logic [7:0]  sr_q;                  // slices of the running operation

  // Slices of the stored operand that meet band g with a non-zero digit.
  function automatic logic [7:0] s_lo(input logic [7:0] g, input logic [7:0] sr);
    return (g > sr) ? g - sr : 8'd0;
  endfunction
  function automatic logic [7:0] s_hi(input logic [7:0] g, input logic [7:0] sr);
    return (g < sr - 8'd1) ? g : sr - 8'd1;
  endfunction

  logic grp_first, grp_last, band_last_slot, last_band;

  always_comb begin
    grp_first      = (s_q == s_lo(g_q, sr_q));
    grp_last       = (s_q == s_hi(g_q, sr_q));
    band_last_slot = (slot_q == 8'(SLOTS - 1));
    last_band      = (g_q == 2 * sr_q - 8'd1);
    ns             = sr_q[$bits(ns)-1:0];

    ready    = (state_q == ST_IDLE);
    load     = ready && start;

    wr_en    = (state_q == ST_WRITE);
    wr_row   = $clog2(MACRO_ROWS)'(int'(wsel_q) * int'(S) + int'(wslice_q));
    wr_sel   = wsel_q[1:0];
    wr_slice = wslice_q[$bits(wr_slice)-1:0];

    mac_en   = (state_q == ST_MUL);
    mac_row  = $clog2(MACRO_ROWS)'(int'(phase_q) * int'(S) + int'(s_q));
    base     = BASE_W'(int'(LANES) * int'(g_q) + int'(K) * int'(slot_q) - int'(LANES) * int'(s_q));
    phase    = phase_q;

    ctl_d         = '0;
    ctl_d.valid   = mac_en;
    ctl_d.first   = grp_first;
    ctl_d.last    = grp_last;
    ctl_d.final_  = last_band && grp_last && band_last_slot;
    ctl_d.slot    = slot_q;
    ctl_d.chunk   = 16'(int'(g_q) * int'(SLOTS) + int'(slot_q));

    fix      = (state_q == ST_FIX);
    sub_en   = (state_q == ST_SUB);
  end

  assign acc_ctl = ctl_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q  <= ST_IDLE;
      phase_q  <= PH_AB;
      wsel_q   <= '0;
      wslice_q <= '0;
      g_q      <= '0;
      s_q      <= '0;
      slot_q   <= '0;
      ctl_q    <= '0;
      sr_q     <= 8'd1;
    end else begin
      ctl_q <= ctl_d;
      unique case (state_q)
        ST_IDLE: if (start) begin
          state_q  <= ST_WRITE;
          sr_q     <= 8'(nslices);
          wsel_q   <= '0;
          wslice_q <= '0;
        end
        ST_WRITE: begin
          if (wslice_q == sr_q - 8'd1) begin
            wslice_q <= '0;
            wsel_q   <= wsel_q + 8'd1;
            if (wsel_q == 8'd2) begin
              state_q <= ST_MUL;
              phase_q <= PH_AB;
              g_q     <= '0;
              s_q     <= '0;
              slot_q  <= '0;
            end
          end else begin
            wslice_q <= wslice_q + 8'd1;
          end
        end
        ST_MUL: begin
          if (!band_last_slot) begin
            slot_q <= slot_q + 8'd1;
          end else begin
            slot_q <= '0;
            if (!grp_last) begin
              s_q <= s_q + 8'd1;                       // next group of the band
            end else if (!last_band) begin
              g_q <= g_q + 8'd1;                       // next band, skip zero groups
              s_q <= s_lo(g_q + 8'd1, sr_q);
            end else begin
              state_q <= ST_DRAIN;
            end
          end
        end
        ST_DRAIN: begin
          g_q    <= '0;
          s_q    <= '0;
          slot_q <= '0;
          unique case (phase_q)
            PH_AB: begin state_q <= ST_MUL; phase_q <= PH_QM; end
            PH_QM: state_q <= ST_FIX;
            default: state_q <= ST_SUB;
          endcase
        end
        ST_FIX: begin
          state_q <= ST_MUL;
          phase_q <= PH_EM;
        end
        ST_SUB:  state_q <= ST_IDLE;
        default: state_q <= ST_IDLE;
      endcase
    end
  end

  // Parameter rules of the mapping.
  initial begin
    assert (N % ROW_W == 0) else $fatal(1, "N must be a multiple of %0d", ROW_W);
    assert (LANES % K == 0) else $fatal(1, "K must divide %0d", LANES);
    assert (3 * S <= MACRO_ROWS) else $fatal(1, "B, M' and M do not fit the macro rows");
  end

  a_no_mac_while_write: assert property (@(posedge clk) disable iff (!rst_n) !(wr_en && mac_en));
  a_issue_in_range:     assert property (@(posedge clk) disable iff (!rst_n)
                                         mac_en |-> (s_q >= s_lo(g_q, sr_q)) && (s_q <= s_hi(g_q, sr_q)));
  a_width_legal:        assert property (@(posedge clk) disable iff (!rst_n)
                                         (ready && start) |-> (nslices >= 1) && (32'(nslices) <= S));

endmodule
