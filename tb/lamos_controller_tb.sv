// lamos_controller_tb -- checks the controller's cycle-by-cycle schedule at
// its default parameters (2048-bit hardware, two macros) against a schedule
// built here: 3S row writes (S = n/256), then for each multiplication every
// workload group that contains a non-zero digit (found by brute force over
// the digit indices), band by band, 16 batches per group with the right
// macro row and shift base, the accumulator control one cycle later, the
// drain/fix/subtract cycles, and the totals of 3485, 104, 299 and 977 cycles
// for n = 2048, 256, 512 and 1024.  Five operations (2048, 256, 512, 1024 and
// 768 bits) are run back to back.
module lamos_controller_tb;
  import lamos_pkg::*;
  localparam int N = 2048, K = 2, S = N / 256, SLOTS = 32 / K;
  localparam int BW = $clog2(64 * S + 1) + 2;

  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  logic [$clog2(S+1)-1:0] nslices = '0, ns;
  logic ready, load, wr_en, mac_en, fix, sub_en;
  logic [5:0] wr_row, mac_row;
  logic [1:0] wr_sel;
  logic [$clog2(S+1)-1:0] wr_slice;
  logic signed [BW-1:0] base;
  mul_phase_e phase;
  acc_ctl_t acc_ctl;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  lamos_controller dut (.*);

  typedef struct {
    bit wr_en; int wr_row; bit mac_en; int mac_row; int base; int phase;
    bit fix; bit sub_en; acc_ctl_t ctl;
  } cyc_t;

  cyc_t sched [$];

  function automatic bit group_nonzero(input int g, input int s, input int tr);
    for (int r = 32 * g; r < 32 * g + 32; r++)
      for (int j = 0; j < 32; j++)
        if (r - 32 * s - j >= 0 && r - 32 * s - j < tr) return 1'b1;
    return 1'b0;
  endfunction

  task automatic build(input int sr);
    cyc_t c;
    sched = {};
    for (int o = 0; o < 3; o++)
      for (int w = 0; w < sr; w++) begin
        c = '{default: 0};
        c.wr_en = 1; c.wr_row = o * S + w;
        sched.push_back(c);
      end
    for (int p = 0; p < 3; p++) begin
      for (int g = 0; g < 2 * sr; g++) begin
        int slo, shi;
        slo = -1; shi = -1;
        for (int s = 0; s < sr; s++) if (group_nonzero(g, s, 32 * sr)) begin
          if (slo < 0) slo = s;
          shi = s;
        end
        for (int s = slo; s <= shi; s++) begin
          for (int slot = 0; slot < SLOTS; slot++) begin
            c = '{default: 0};
            c.mac_en = 1; c.mac_row = p * S + s; c.base = 32 * g + K * slot - 32 * s; c.phase = p;
            c.ctl = '{valid: 1'b1, first: (s == slo), last: (s == shi),
                      final_: (g == 2 * sr - 1 && s == shi && slot == SLOTS - 1),
                      slot: 8'(slot), chunk: 16'(g * SLOTS + slot)};
            sched.push_back(c);
          end
        end
      end
      c = '{default: 0}; c.phase = p;              // drain
      sched.push_back(c);
      if (p == 1) begin c = '{default: 0}; c.fix = 1; c.phase = p; sched.push_back(c); end
    end
    c = '{default: 0}; c.sub_en = 1; c.phase = 2;
    sched.push_back(c);
  endtask

  task automatic chk(input string what, input int got, input int expv, input int cyc);
    checks++;
    if (got != expv) begin
      failures++;
      if (failures < 20) $display("cycle %0d %s: got %0d exp %0d", cyc, what, got, expv);
    end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1'b1;
    for (int op = 0; op < 5; op++) begin
      acc_ctl_t prev_ctl;
      int sr;
      int widths [5] = '{8, 1, 2, 4, 3};
      int paper  [5] = '{3485, 104, 299, 977, 3 * 3 + 3 * 12 * 16 + 5};
      sr = widths[op];
      build(sr);
      chk("schedule length", sched.size(), paper[op], -1);
      @(posedge clk); #1;
      chk("ready idle", int'(ready), 1, 0);
      start = 1'b1;
      nslices = $bits(nslices)'(sr);
      #1;
      chk("load", int'(load), 1, 0);
      @(posedge clk); #1;
      start = 1'b0;
      nslices = '0;
      chk("ns", int'(ns), sr, 0);
      prev_ctl = '0;
      for (int i = 0; i < sched.size(); i++) begin
        cyc_t c;
        c = sched[i];
        chk("ready busy", int'(ready), 0, i);
        chk("wr_en", int'(wr_en), int'(c.wr_en), i);
        if (c.wr_en) begin
          chk("wr_row", int'(wr_row), c.wr_row, i);
          chk("wr_sel", int'(wr_sel), c.wr_row / S, i);
          chk("wr_slice", int'(wr_slice), c.wr_row % S, i);
        end
        chk("mac_en", int'(mac_en), int'(c.mac_en), i);
        if (c.mac_en) begin
          chk("mac_row", int'(mac_row), c.mac_row, i);
          chk("base", int'(base), c.base, i);
          chk("phase", int'(phase), c.phase, i);
        end
        chk("fix", int'(fix), int'(c.fix), i);
        chk("sub_en", int'(sub_en), int'(c.sub_en), i);
        if (prev_ctl.valid) chk("acc_ctl", int'(acc_ctl == prev_ctl), 1, i);
        else                chk("acc_ctl.valid", int'(acc_ctl.valid), 0, i);
        prev_ctl = c.ctl;
        @(posedge clk); #1;
      end
      chk("ready after", int'(ready), 1, sched.size());
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
