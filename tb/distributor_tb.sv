// distributor_tb -- drives the three product deliveries of one operation and
// checks C buffer, u buffer and P register contents, the p_valid pulse, and
// that after the fix cycle the u buffer holds the exact q*M' although only the
// low-n-bit product q_lo*M'_lo was delivered (q = floor(C/2^(n-1))).
// Cycles the operation width n through 256 .. 2048 bits on the default
// 2048-bit hardware.
module distributor_tb;
  import lamos_pkg::*;
  localparam int N = 2048, S = N / 256;

  logic clk = 1'b0, rst_n = 1'b0;
  mul_phase_e phase = PH_AB;
  logic fire = 1'b0, fix = 1'b0, q_top = 1'b0, mp_top = 1'b0;
  logic [2*N-1:0] product = '0;
  logic [N-1:0] q_lo = '0, mp_lo = '0;
  logic [$clog2(S+1)-1:0] ns = '0;
  logic [2*N-1:0] c_buf, p_buf;
  logic [2*N+1:0] u_buf;
  logic p_valid;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  distributor dut (.*);

  function automatic logic [2*N-1:0] rnd();
    logic [2*N-1:0] v;
    for (int i = 0; i < 2 * N / 32; i++) v[i*32 +: 32] = $urandom;
    return v;
  endfunction

  task automatic chk(input string what, input logic [2*N+1:0] got, input logic [2*N+1:0] expv);
    checks++;
    if (got !== expv) begin failures++; $display("%s: got %h exp %h", what, got, expv); end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    for (int t = 0; t < 64; t++) begin
      logic [2*N-1:0] c0, p0;
      logic [N:0] q, mp0;
      logic [2*N+1:0] u_exact;
      int n;
      ns  = $bits(ns)'(1 + t % S);
      n   = 256 * int'(ns);
      c0  = rnd() & ({(2*N){1'b1}} >> (2 * (N - n)));
      if (t % 4 == 0) c0[2*n-1] = 1'b0;
      if (t % 4 == 1) c0[2*n-1] = 1'b1;
      mp0 = (N+1)'(rnd()) & ({(N+1){1'b1}} >> (N - n));
      mp0[n] = (t % 3 != 2);
      q   = (N+1)'(c0 >> (n - 1));
      u_exact = (2*N+2)'(q) * (2*N+2)'(mp0);
      q_lo  = N'(q) & ({N{1'b1}} >> (N - n));
      q_top = q[n];
      mp_lo = N'(mp0) & ({N{1'b1}} >> (N - n));
      mp_top = mp0[n];
      // C
      phase = PH_AB; product = c0; fire = 1'b1;
      @(posedge clk); #1;
      fire = 1'b0;
      chk("C buffer", (2*N+2)'(c_buf), (2*N+2)'(c0));
      // u (raw low-part product), then fix
      phase = PH_QM;
      product = (2*N)'(q_lo) * (2*N)'(mp_lo);
      fire = 1'b1;
      @(posedge clk); #1;
      fire = 1'b0;
      fix = 1'b1;
      @(posedge clk); #1;
      fix = 1'b0;
      chk("u buffer", u_buf, u_exact);
      checks++;
      if (p_valid) begin failures++; $display("p_valid outside PH_EM"); end
      // P
      phase = PH_EM; p0 = rnd(); product = p0; fire = 1'b1;
      @(posedge clk); #1;
      fire = 1'b0;
      chk("P", (2*N+2)'(p_buf), (2*N+2)'(p0));
      chk("p_valid", (2*N+2)'(p_valid), 1);
      chk("C kept", (2*N+2)'(c_buf), (2*N+2)'(c0));
      @(posedge clk); #1;
      chk("p_valid pulse", (2*N+2)'(p_valid), 0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
