// lamos_tb_core -- reusable end-to-end checker for lamos_top at one (N, K).
//
// Each operation picks a width n = 256*ns with ns in NS_LO..NS_HI, a random
// modulus M (n bits, top bit set, odd), M' = floor(2^(2n)/M) and random
// operands A, B < M, biased towards large values so that all three
// final-correction cases occur.  Each result is compared with (A*B) mod M
// computed with wide integer arithmetic, and each latency (start edge to
// done) with 3ns + 3*ns(ns+1)*32/K + 5, or with EXP_LAT when it is non-zero.
// The run continues until MIN_OPS operations have passed and every
// mechanism was seen, or MAX_OPS were run.
//
// Mechanisms counted: final result T, T-M, T-2M; u completion with the top
// bit of floor(C/2^(n-1)) set and clear; if NS_HI > 1 a band-buffer
// accumulation (a band served by more than one group); if NS_LO < NS_HI a
// change of width between consecutive operations.  A mechanism never seen
// counts as a failure.  finished goes high when the run is over.
module lamos_tb_core #(
  parameter int unsigned N       = 256,
  parameter int unsigned K       = 2,
  parameter int unsigned NS_LO   = N / 256,
  parameter int unsigned NS_HI   = N / 256,
  parameter int unsigned EXP_LAT = 0,
  parameter int unsigned MIN_OPS = 20,
  parameter int unsigned MAX_OPS = 600,
  parameter int unsigned SEED    = 1,
  parameter bit          CHECK_MECH = 1'b1   // count unseen mechanisms as failures
) (
  output logic finished,
  output int   checks,
  output int   failures
);

  localparam int unsigned SW = $clog2(N / 256 + 1);

  logic clk = 1'b0, rst_n = 1'b0;
  logic start = 1'b0, ready, done;
  logic [SW-1:0] nslices;
  logic [N-1:0] a, b, m, r;
  logic [N:0]   mp;

  always #5 clk = ~clk;

  lamos_top #(.N(N), .K(K)) dut (.*);

  int seen_corr[3];
  int seen_qtop[2];
  int seen_band;
  int seen_switch;

  // Observe internal events for the mechanism counts.
  always @(posedge clk) begin
    if (dut.sub_en) begin
      if (dut.u_sub.t1[N+2])      seen_corr[0]++;
      else if (dut.u_sub.t2[N+2]) seen_corr[1]++;
      else                        seen_corr[2]++;
    end
    if (dut.fix) seen_qtop[dut.q_top]++;
    if (dut.acc_ctl.valid && !dut.acc_ctl.first) seen_band++;
  end

  function automatic logic [N-1:0] rand_n(input int unsigned n);
    logic [N-1:0] x;
    for (int i = 0; i < (N + 31) / 32; i++) x[i*32 +: 32] = $urandom;
    return x & ({N{1'b1}} >> (N - n));
  endfunction

  function automatic int expected_latency(input int unsigned ns);
    if (EXP_LAT != 0) return int'(EXP_LAT);
    return int'(3 * ns + 3 * ns * (ns + 1) * (32 / K) + 5);
  endfunction

  task automatic one_op(input int unsigned ns, input logic [N-1:0] aa, bb, mm);
    logic [2*N-1:0] ones2n;
    logic [2*N-1:0] prod, expr;
    int lat;
    // M is odd, so floor(2^(2n)/M) = floor((2^(2n)-1)/M).
    ones2n = {(2*N){1'b1}} >> (2 * (N - 256 * ns));
    mp  = (N+1)'(ones2n / {N'(0), mm});
    a = aa; b = bb; m = mm; nslices = SW'(ns);
    prod = {N'(0), aa} * {N'(0), bb};
    expr = prod % {N'(0), mm};
    while (!ready) @(posedge clk);
    start <= 1'b1;
    @(posedge clk);
    start <= 1'b0;
    a <= rand_n(N); b <= rand_n(N); m <= rand_n(N); mp <= '0;   // operands are captured
    nslices <= '0;
    lat = 0;
    do begin @(posedge clk); #1; lat++; end while (!done && lat < 100000);
    checks++;
    if (r != expr[N-1:0]) begin
      failures++;
      $display("MISMATCH N=%0d K=%0d n=%0d: A=%h B=%h M=%h got %h exp %h", N, K, 256 * ns, aa, bb, mm, r, expr[N-1:0]);
    end
    checks++;
    if (lat != expected_latency(ns)) begin
      failures++;
      $display("LATENCY N=%0d K=%0d n=%0d: %0d cycles, expected %0d", N, K, 256 * ns, lat, expected_latency(ns));
    end
  endtask

  function automatic bit all_seen();
    if (!CHECK_MECH) return 1'b1;
    return seen_corr[0] > 0 && seen_corr[1] > 0 && seen_corr[2] > 0 &&
           seen_qtop[0] > 0 && seen_qtop[1] > 0 &&
           (NS_HI <= 1 || seen_band > 0) && (NS_LO == NS_HI || seen_switch > 0);
  endfunction

  initial begin
    logic [N-1:0] mm, aa, bb;
    int unsigned ns, n, prev_ns;
    int ops;
    finished = 1'b0;
    checks = 0; failures = 0;
    seen_corr = '{0, 0, 0}; seen_qtop = '{0, 0}; seen_band = 0; seen_switch = 0;
    void'($urandom(SEED));
    a = '0; b = '0; m = '0; mp = '0; nslices = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk);
    ops = 0;
    prev_ns = 0;
    while ((ops < int'(MIN_OPS) || !all_seen()) && ops < int'(MAX_OPS)) begin
      ns = $urandom_range(NS_HI, NS_LO);
      n  = 256 * ns;
      mm = rand_n(n);
      mm[n-1] = 1'b1;
      mm[0]   = 1'b1;
      aa = rand_n(n) % mm;
      bb = rand_n(n) % mm;
      if ($urandom_range(1, 0) == 1) aa = mm - 1 - (rand_n(n) >> (n / 2));
      if ($urandom_range(1, 0) == 1) bb = mm - 1 - (rand_n(n) >> (n / 2));
      if (ops == 0) begin aa = '0; end
      if (ops == 1) begin aa = mm - 1; bb = mm - 1; end
      if (prev_ns != 0 && ns != prev_ns) seen_switch++;
      one_op(ns, aa, bb, mm);
      prev_ns = ns;
      ops++;
    end
    if (CHECK_MECH) begin
      for (int i = 0; i < 3; i++) begin
        checks++;
        if (seen_corr[i] == 0) begin failures++; $display("N=%0d K=%0d: correction case %0d never seen", N, K, i); end
      end
      for (int i = 0; i < 2; i++) begin
        checks++;
        if (seen_qtop[i] == 0) begin failures++; $display("N=%0d K=%0d: q top bit %0d never seen", N, K, i); end
      end
      if (NS_HI > 1) begin
        checks++;
        if (seen_band == 0) begin failures++; $display("N=%0d K=%0d: band buffer never used", N, K); end
      end
      if (NS_LO != NS_HI) begin
        checks++;
        if (seen_switch == 0) begin failures++; $display("N=%0d K=%0d: width never changed", N, K); end
      end
    end
    $display("core N=%0d K=%0d n=%0d..%0d: %0d ops, corrections T/T-M/T-2M = %0d/%0d/%0d, q_top 0/1 = %0d/%0d, band-buffer batches = %0d, width changes = %0d",
             N, K, 256 * NS_LO, 256 * NS_HI, ops, seen_corr[0], seen_corr[1], seen_corr[2],
             seen_qtop[0], seen_qtop[1], seen_band, seen_switch);
    finished = 1'b1;
  end

endmodule
