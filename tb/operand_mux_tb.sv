// operand_mux_tb -- loads random A, B, M, M' and, for each operation width
// n = 256 .. 2048 on the default 2048-bit hardware, checks the streamed operand of each
// phase (A, floor(C/2^(n-1)) mod 2^n, floor(u/2^(n+1)) mod 2^n, digits above
// n zero), bit n of floor(C/2^(n-1)) and of M', the captured M, the low n bits
// of M', the write-driver slices of B, M' and M, and that the buffers ignore
// inputs while load is low.
module operand_mux_tb;
  import lamos_pkg::*;
  localparam int N = 2048, S = N / 256;

  logic clk = 1'b0, load = 1'b0;
  logic [N-1:0] a_in, b_in, m_in, m_q, q_lo, mp_lo;
  logic [N:0] mp_in;
  logic [$clog2(S+1)-1:0] ns;
  logic mp_top;
  mul_phase_e phase;
  logic [2*N-1:0] c_buf;
  logic [2*N+1:0] u_buf;
  logic [N/8-1:0][7:0] operand;
  logic q_top;
  logic [1:0] wr_sel;
  logic [$clog2(S+1)-1:0] wr_slice;
  logic [ROW_W-1:0] wr_data;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  operand_mux dut (.*);

  function automatic logic [2*N+1:0] rnd();
    logic [2*N+1:0] v;
    for (int i = 0; i < (2 * N + 2 + 31) / 32; i++) v[i*32 +: 32] = $urandom;
    return v;
  endfunction

  task automatic chk(input string what, input logic [N:0] got, input logic [N:0] expv);
    checks++;
    if (got !== expv) begin failures++; $display("%s: got %h exp %h", what, got, expv); end
  endtask

  initial begin
    for (int t = 0; t < 40; t++) begin
      logic [N-1:0] a0, b0, m0;
      logic [N:0] mp0;
      logic [2*N-1:0] c0;
      logic [2*N+1:0] u0;
      logic [N-1:0] msk;
      int n;
      ns  = $bits(ns)'(1 + t % S);
      n   = 256 * int'(ns);
      msk = {N{1'b1}} >> (N - n);
      a0 = N'(rnd()); b0 = N'(rnd()); m0 = N'(rnd()); mp0 = (N+1)'(rnd());
      a_in = a0; b_in = b0; m_in = m0; mp_in = mp0; load = 1'b1;
      @(posedge clk); #1;
      load = 1'b0;
      a_in = N'(rnd()); b_in = N'(rnd()); m_in = N'(rnd()); mp_in = (N+1)'(rnd());
      @(posedge clk); #1;
      c0 = (2*N)'(rnd()); u0 = rnd();
      c_buf = c0; u_buf = u0;
      phase = PH_AB; #1; chk("A", (N+1)'(operand), (N+1)'(a0 & msk));
      phase = PH_QM; #1; chk("C>>(n-1)", (N+1)'(operand), (N+1)'(N'(c0 >> (n - 1)) & msk));
      chk("q_lo", (N+1)'(q_lo), (N+1)'(N'(c0 >> (n - 1)) & msk));
      chk("q_top", (N+1)'(q_top), (N+1)'(c0[2*n-1]));
      phase = PH_EM; #1; chk("u>>(n+1)", (N+1)'(operand), (N+1)'(N'(u0 >> (n + 1)) & msk));
      chk("M", (N+1)'(m_q), (N+1)'(m0));
      chk("M' low", (N+1)'(mp_lo), (N+1)'(mp0[N-1:0] & msk));
      chk("M' top", (N+1)'(mp_top), (N+1)'(mp0[n]));
      for (int sel = 0; sel < 3; sel++) begin
        for (int s = 0; s < S; s++) begin
          logic [N-1:0] w;
          w = (sel == 0) ? b0 : (sel == 1) ? mp0[N-1:0] : m0;
          wr_sel = 2'(sel); wr_slice = $bits(wr_slice)'(s);
          #1;
          chk("wr_data", (N+1)'(wr_data), (N+1)'(w[s*ROW_W +: ROW_W]));
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
