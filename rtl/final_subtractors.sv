// final_subtractors -- last Barrett step: T = C - P, R = T, T-M or T-2M.
//
// Barrett's estimate E is at most two below the true quotient, so
// 0 <= T < 3M < 2^(n+2) and only the low n+2 bits of C and P take part.
// Two cascaded subtractors form T-M and T-2M; their borrow bits drive the
// result multiplexer.  The result register loads when `en` is high and
// r_valid follows one cycle later.
//
// Structure (subtract, cascaded subtractors, mux) follows the paper; the
// single registered stage is this design's choice.
module final_subtractors
  import lamos_pkg::*;
#(
  parameter int unsigned N = 2048
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           en,
  input  logic [2*N-1:0] c,
  input  logic [2*N-1:0] p,
  input  logic [N-1:0]   m,
  output logic [N-1:0]   r,
  output logic           r_valid
);

  logic [N+1:0] t;
  logic [N+2:0] t1, t2;   // one extra bit holds the borrow
  logic [N-1:0] r_d;

  always_comb begin
    t  = c[N+1:0] - p[N+1:0];
    t1 = {1'b0, t}  - (N+3)'(m);
    t2 = {1'b0, t1[N+1:0]} - (N+3)'(m);
    if (t1[N+2])      r_d = t[N-1:0];         // T < M
    else if (t2[N+2]) r_d = t1[N-1:0];        // M <= T < 2M
    else              r_d = t2[N-1:0];        // T >= 2M
  end

  always_ff @(posedge clk) begin
    if (en) r <= r_d;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) r_valid <= 1'b0;
    else        r_valid <= en;
  end

endmodule
