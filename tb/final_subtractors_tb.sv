// final_subtractors_tb -- builds C and P so that T = C - P equals R, R+M or
// R+2M for a random R < M and checks that the block returns R one cycle
// after en.  Default size (2048-bit hardware); the operation width n cycles
// through 256 .. 2048 bits, since only the low N+2 bits of C - P are used.
module final_subtractors_tb;
  localparam int N = 2048;

  logic clk = 1'b0, rst_n = 1'b0, en = 1'b0;
  logic [2*N-1:0] c, p;
  logic [N-1:0] m, r;
  logic r_valid;
  int checks = 0, failures = 0;
  int seen [3] = '{0, 0, 0};

  always #5 clk = ~clk;

  final_subtractors dut (.*);

  function automatic logic [2*N-1:0] rnd(input int bits);
    logic [2*N-1:0] x;
    for (int i = 0; i < 2 * N / 32; i++) x[i*32 +: 32] = $urandom;
    return x >> (2 * N - bits);
  endfunction

  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1'b1;
    for (int t = 0; t < 300; t++) begin
      logic [2*N-1:0] mm, rr, tt;
      int k, n;
      n  = 256 * (1 + t % 8);
      mm = rnd(n); mm[n-1] = 1'b1;
      rr = rnd(2 * N) % mm;
      if (t == 0) rr = mm - 1;
      k  = t % 3;
      tt = rr + mm * k;
      p  = rnd(2 * n - 1);
      c  = p + tt;
      m  = mm[N-1:0];
      en <= 1'b1;
      @(posedge clk);
      en <= 1'b0;
      #1;
      checks++;
      if (!r_valid || r !== rr[N-1:0]) begin
        failures++;
        $display("k=%0d: got %h exp %h valid %b", k, r, rr[N-1:0], r_valid);
      end
      seen[k]++;
    end
    @(posedge clk); #1;
    checks++;
    if (r_valid) begin failures++; $display("r_valid stuck"); end
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
