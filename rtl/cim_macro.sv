// cim_macro -- functional model of one 64 x 256 8T-SRAM compute-in-memory
// MAC macro.
//
// Each row holds 32 8-bit words (word j in bits 8j+7:8j).  In a MAC cycle the
// decoder selects row mac_row and lane j multiplies its stored word by the
// 8-bit input mac_in[j]; the in-macro adder tree sums the 32 products into a
// 21-bit result (8 + 8 + log2 32 bits), as the paper states.  The write driver
// writes one full row per cycle.
//
// Timing: mac_out/mac_valid are registered, so a MAC issued in cycle t is
// visible in cycle t+1.  A write and a MAC in the same cycle to the same row
// see the old row contents.
//
// The paper takes this macro from a published silicon CiM design and gives
// only its size and MAC function; the bit-cell array, the in-memory
// multipliers and the analog/physical details are replaced here by an array,
// 32 multipliers and an adder, which compute the same numbers.  The one-cycle
// latency and the write port shape are this model's own choice.
module cim_macro
  import lamos_pkg::*;
#(
  parameter int unsigned ROWS = MACRO_ROWS,
  parameter int unsigned NLANE = LANES
) (
  input  logic                              clk,
  input  logic                              rst_n,
  // write driver
  input  logic                              wr_en,
  input  logic [$clog2(ROWS)-1:0]           wr_row,
  input  logic [NLANE*DIGIT_W-1:0]          wr_data,
  // MAC port
  input  logic                              mac_en,
  input  logic [$clog2(ROWS)-1:0]           mac_row,
  input  logic [NLANE-1:0][DIGIT_W-1:0]     mac_in,
  output logic [2*DIGIT_W+$clog2(NLANE)-1:0] mac_out,
  output logic                              mac_valid
);

  localparam int unsigned OUT_W = 2 * DIGIT_W + $clog2(NLANE);

  logic [NLANE-1:0][DIGIT_W-1:0] mem [ROWS];
  logic [NLANE-1:0][DIGIT_W-1:0] row_q;
  logic [OUT_W-1:0]              mac_sum;

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_row] <= wr_data;
  end

  // In-memory multipliers and in-macro adder tree.
  always_comb begin
    row_q   = mem[mac_row];
    mac_sum = '0;
    for (int j = 0; j < NLANE; j++) begin
      mac_sum = mac_sum + OUT_W'({8'd0, row_q[j]} * {8'd0, mac_in[j]});
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mac_out   <= '0;
      mac_valid <= 1'b0;
    end else begin
      mac_valid <= mac_en;
      if (mac_en) mac_out <= mac_sum;
    end
  end

endmodule
