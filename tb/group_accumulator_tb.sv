// group_accumulator_tb -- feeds the accumulator with the adder-tree sums of a
// real grouped multiplication at the default parameters (2048-bit hardware,
// two macros; at n = 2048: 16 bands, 72 groups, 16 batches each, band buffer
// in use) and checks the assembled product against X*Y computed directly,
// for several operand pairs in a row.  The widths alternate between 2048
// bits and narrower ones (256 .. 1024 bits) on the same hardware, which
// checks that the unused upper part of the product register is cleared.  The batch sums are formed here from the digits, independently
// of the RTL.
module group_accumulator_tb;
  import lamos_pkg::*;
  localparam int N = 2048, K = 2, T = N / 8, S = N / 256, SLOTS = 32 / K;
  localparam int TW = tree_w(K);

  logic clk = 1'b0, rst_n = 1'b0;
  acc_ctl_t ctl;
  logic [TW-1:0] in_sum;
  logic [2*N-1:0] result_q, result_d;
  logic done_d;
  int checks = 0, failures = 0, band_batches = 0;

  always #5 clk = ~clk;

  group_accumulator dut (.*);

  logic [T-1:0][7:0] x, y;

  function automatic int dig_x(input int i);
    return (i >= 0 && i < T) ? int'(x[i]) : 0;
  endfunction

  initial begin
    ctl = '0; in_sum = '0;
    repeat (2) @(posedge clk);
    rst_n <= 1'b1;
    for (int op = 0; op < 8; op++) begin
      logic [2*N-1:0] expv;
      int sr;
      int widths [8] = '{8, 1, 8, 2, 8, 3, 4, 1};
      sr = widths[op];
      for (int i = 0; i < T; i++) begin
        x[i] = (op == 0) ? 8'hFF : 8'($urandom);
        y[i] = (op == 0) ? 8'hFF : 8'($urandom);
        if (i >= 32 * sr) begin x[i] = 8'd0; y[i] = 8'd0; end
      end
      expv = {N'(0), x} * {N'(0), y};
      for (int g = 0; g < 2 * sr; g++) begin
        int slo, shi;
        slo = (g > sr) ? g - sr : 0;
        shi = (g < sr - 1) ? g : sr - 1;
        for (int s = slo; s <= shi; s++) begin
          for (int slot = 0; slot < SLOTS; slot++) begin
            logic [TW-1:0] sum;
            sum = '0;
            for (int k = 0; k < K; k++) begin
              int v;
              v = 0;
              for (int j = 0; j < 32; j++) v += dig_x(32*g + K*slot + k - 32*s - j) * int'(y[32*s + j]);
              sum += TW'(v) << (8 * k);
            end
            ctl = '{valid: 1'b1, first: (s == slo), last: (s == shi),
                    final_: (g == 2*sr-1 && s == shi && slot == SLOTS-1),
                    slot: 8'(slot), chunk: 16'(g * SLOTS + slot)};
            in_sum = sum;
            if (s != shi) band_batches++;
            #1;
            // done_d and result_d describe the edge that is coming
            if (g == 2*sr-1 && s == shi && slot == SLOTS-1) begin
              checks += 2;
              if (!done_d) begin failures++; $display("done_d missing"); end
              if (result_d !== expv) begin failures++; $display("op %0d result_d wrong", op); end
            end else begin
              checks++;
              if (done_d) begin failures++; $display("early done_d"); end
            end
            @(posedge clk);
            #1;
          end
        end
      end
      ctl = '0;
      @(posedge clk); #1;
      checks++;
      if (result_q !== expv) begin
        failures++;
        $display("op %0d: got %h\n exp %h", op, result_q, expv);
      end
      // idle cycles must not disturb the result
      repeat (op) @(posedge clk);
    end
    checks++;
    if (band_batches == 0) begin failures++; $display("band buffer never used"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
