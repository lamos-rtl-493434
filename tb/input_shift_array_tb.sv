// input_shift_array_tb -- checks that lane j of macro k receives operand digit
// base+k-j (zero outside the operand) for random operands and every base of
// a 2048-bit operand, with two macros (default parameters) and with four.
module input_shift_array_tb;
  import lamos_pkg::*;
  localparam int T = 256;
  localparam int BW = 12;

  logic [T-1:0][7:0] operand;
  logic signed [BW-1:0] base;
  logic [1:0][LANES-1:0][7:0] lanes2;
  logic [3:0][LANES-1:0][7:0] lanes4;
  int checks = 0, failures = 0;

  input_shift_array dut2 (.operand, .base, .lanes(lanes2));
  input_shift_array #(.T(T), .K(4), .BASE_W(BW)) dut4 (.operand, .base, .lanes(lanes4));

  function automatic logic [7:0] digit(input int i);
    return (i >= 0 && i < T) ? operand[i] : 8'd0;
  endfunction

  initial begin
    for (int rep = 0; rep < 4; rep++) begin
      for (int i = 0; i < T; i++) operand[i] = 8'($urandom_range(255, 1));
      for (int b = -70; b <= 2 * T + 4; b++) begin
        base = BW'(b);
        #1;
        for (int j = 0; j < LANES; j++) begin
          for (int k = 0; k < 2; k++) begin
            checks++;
            if (lanes2[k][j] !== digit(b + k - j)) begin
              failures++;
              if (failures < 10) $display("K=2 base %0d macro %0d lane %0d: %h exp %h", b, k, j, lanes2[k][j], digit(b + k - j));
            end
          end
          for (int k = 0; k < 4; k++) begin
            checks++;
            if (lanes4[k][j] !== digit(b + k - j)) begin
              failures++;
              if (failures < 10) $display("K=4 base %0d macro %0d lane %0d: %h exp %h", b, k, j, lanes4[k][j], digit(b + k - j));
            end
          end
        end
      end
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
