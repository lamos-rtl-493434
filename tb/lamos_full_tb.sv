// lamos_full_tb -- lamos_top at its default parameters (2048-bit hardware,
// two macros).  Runs random modular multiplications at 256, 512, 1024 and
// 2048 bits, checks each result against (A*B) mod M and each latency
// against the reported cycle counts (104 / 299 / 977 / 3485), with the
// widths in between (768 .. 1792 bits) checked against 3S + 3*S(S+1)*16 + 5.
// Also checks that ready is back in the cycle done is raised.
module lamos_full_tb;
  localparam int N = 2048;

  logic clk = 1'b0, rst_n = 1'b0;
  logic start = 1'b0, ready, done;
  logic [3:0]   nslices;
  logic [N-1:0] a, b, m, r;
  logic [N:0]   mp;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  lamos_top dut (.*);

  function automatic logic [N-1:0] rand_n(input int n);
    logic [N-1:0] x;
    for (int i = 0; i < N / 32; i++) x[i*32 +: 32] = $urandom;
    return x & ({N{1'b1}} >> (N - n));
  endfunction

  function automatic int paper_latency(input int s);
    case (s)
      1: return 104;
      2: return 299;
      4: return 977;
      8: return 3485;
      default: return 3 * s + 3 * s * (s + 1) * 16 + 5;
    endcase
  endfunction

  initial begin
    logic [N-1:0] aa, bb, mm;
    logic [2*N-1:0] ones2n;
    logic [2*N-1:0] expr;
    int lat, s, n;
    int widths [12] = '{1, 2, 4, 8, 1, 3, 2, 5, 4, 6, 7, 1};
    a = '0; b = '0; m = '0; mp = '0; nslices = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk);
    for (int op = 0; op < 12; op++) begin
      s = widths[op];
      n = 256 * s;
      mm = rand_n(n); mm[n-1] = 1'b1; mm[0] = 1'b1;
      aa = rand_n(n) % mm;
      bb = (op % 3 == 0) ? mm - 1 : rand_n(n) % mm;
      ones2n = {(2*N){1'b1}} >> (2 * (N - n));   // M odd: floor(2^(2n)/M) = floor((2^(2n)-1)/M)
      expr = ({N'(0), aa} * {N'(0), bb}) % {N'(0), mm};
      a = aa; b = bb; m = mm; mp = (N+1)'(ones2n / {N'(0), mm}); nslices = 4'(s);
      while (!ready) @(posedge clk);
      start <= 1'b1;
      @(posedge clk);
      start <= 1'b0;
      lat = 0;
      do begin @(posedge clk); #1; lat++; end while (!done && lat < 10000);
      checks += 2;
      if (r != expr[N-1:0]) begin failures++; $display("MISMATCH n=%0d A=%h B=%h M=%h got %h exp %h", n, aa, bb, mm, r, expr[N-1:0]); end
      if (lat != paper_latency(s)) begin failures++; $display("LATENCY n=%0d: %0d, expected %0d", n, lat, paper_latency(s)); end
      // ready must be back right after done
      checks++;
      if (!ready) begin failures++; $display("not ready after done"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #10_000_000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
