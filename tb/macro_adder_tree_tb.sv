// macro_adder_tree_tb -- checks sum_k v[k]*2^(8k) for 1, 2, 4 and 8 macros
// with random and all-ones 21-bit inputs.
module macro_adder_tree_tb;
  import lamos_pkg::*;

  logic [0:0][MAC_W-1:0] v1;
  logic [1:0][MAC_W-1:0] v2;
  logic [3:0][MAC_W-1:0] v4;
  logic [7:0][MAC_W-1:0] v8;
  logic [tree_w(1)-1:0] s1;
  logic [tree_w(2)-1:0] s2;
  logic [tree_w(4)-1:0] s4;
  logic [tree_w(8)-1:0] s8;
  int checks = 0, failures = 0;

  macro_adder_tree #(.K(1)) d1 (.v(v1), .sum(s1));
  macro_adder_tree #(.K(2)) d2 (.v(v2), .sum(s2));
  macro_adder_tree #(.K(4)) d4 (.v(v4), .sum(s4));
  macro_adder_tree #(.K(8)) d8 (.v(v8), .sum(s8));

  task automatic chk(input int k, input logic [127:0] got, input logic [127:0] exp_v);
    checks++;
    if (got !== exp_v) begin
      failures++;
      $display("K=%0d: got %h exp %h", k, got, exp_v);
    end
  endtask

  initial begin
    for (int t = 0; t < 500; t++) begin
      logic [127:0] e1, e2, e4, e8;
      for (int k = 0; k < 8; k++) begin
        logic [MAC_W-1:0] x;
        x = (t < 3) ? '1 : MAC_W'($urandom);
        if (k < 1) v1[k] = x;
        if (k < 2) v2[k] = x;
        if (k < 4) v4[k] = x;
        v8[k] = x;
      end
      e1 = 0; e2 = 0; e4 = 0; e8 = 0;
      for (int k = 0; k < 8; k++) begin
        if (k < 1) e1 += 128'(v1[k]) << (8 * k);
        if (k < 2) e2 += 128'(v2[k]) << (8 * k);
        if (k < 4) e4 += 128'(v4[k]) << (8 * k);
        e8 += 128'(v8[k]) << (8 * k);
      end
      #1;
      chk(1, 128'(s1), e1);
      chk(2, 128'(s2), e2);
      chk(4, 128'(s4), e4);
      chk(8, 128'(s8), e8);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1_000_000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
