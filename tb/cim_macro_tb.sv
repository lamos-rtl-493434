// cim_macro_tb -- writes random rows into the macro and checks MAC results
// (sum of 32 8-bit products, computed here independently) and the one-cycle
// output latency, including all-ones rows and inputs for the 21-bit maximum.
module cim_macro_tb;
  import lamos_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  logic wr_en = 1'b0, mac_en = 1'b0;
  logic [5:0] wr_row = '0, mac_row = '0;
  logic [ROW_W-1:0] wr_data = '0;
  logic [LANES-1:0][DIGIT_W-1:0] mac_in = '0;
  logic [MAC_W-1:0] mac_out;
  logic mac_valid;
  int checks = 0, failures = 0;

  logic [ROW_W-1:0] model [64];

  always #5 clk = ~clk;

  cim_macro dut (.*);

  function automatic logic [MAC_W-1:0] ref_mac(input logic [ROW_W-1:0] row,
                                               input logic [LANES-1:0][DIGIT_W-1:0] x);
    int unsigned s = 0;
    for (int j = 0; j < LANES; j++) s += int'(row[8*j +: 8]) * int'(x[j]);
    return MAC_W'(s);
  endfunction

  initial begin
    logic [MAC_W-1:0] expv;
    repeat (2) @(posedge clk);
    rst_n <= 1'b1;
    // fill every row
    for (int r = 0; r < 64; r++) begin
      logic [ROW_W-1:0] d;
      for (int i = 0; i < ROW_W / 32; i++) d[i*32 +: 32] = $urandom;
      if (r == 5) d = '1;
      model[r] = d;
      wr_en <= 1'b1; wr_row <= 6'(r); wr_data <= d;
      @(posedge clk);
    end
    wr_en <= 1'b0;
    // MACs
    for (int t = 0; t < 300; t++) begin
      logic [LANES-1:0][DIGIT_W-1:0] x;
      int r;
      for (int j = 0; j < LANES; j++) x[j] = 8'($urandom);
      r = (t < 5) ? 5 : int'($urandom_range(63, 0));
      if (t < 5) x = '1;
      mac_en <= 1'b1; mac_row <= 6'(r); mac_in <= x;
      expv = ref_mac(model[r], x);
      @(posedge clk);
      mac_en <= 1'b0;
      #1;
      checks++;
      if (!mac_valid || mac_out !== expv) begin
        failures++;
        $display("MAC row %0d: got %0d valid %b, exp %0d", r, mac_out, mac_valid, expv);
      end
    end
    // valid must drop when no MAC is issued
    @(posedge clk); #1;
    checks++;
    if (mac_valid) begin failures++; $display("mac_valid stuck"); end
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
