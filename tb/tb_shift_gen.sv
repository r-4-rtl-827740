// tb_shift_gen: checks the pulse sequences of the shift generator.
// For random registers in both modes it counts the shift pulses per track and
// direction, the access strobes and the cycles, and compares them with the
// walk the architecture prescribes: horizontal accesses pulse only the
// register's track, walk AP_SPAN positions with one strobe each and end at
// the resting offset; vertical accesses pulse all tracks together to slot
// r / groups and strobe once.
//
// It runs the default geometry (2 ports, 32 tracks, 64 positions).
// The expected pulse counts are the paper's cost formulas; the cycle counts
// follow this design's one-step-per-clock sequencing.
module tb_shift_gen;
  import r4_pkg::*;
  localparam int R = NUM_REGS, B = REG_BITS, N = NUM_TRACKS, W = TRACK_POS, NAP = NUM_AP;
  localparam int S = W / NAP, G = NAP * N / B, OW = $clog2(S) + 2;

  logic clk = 0, rst_n = 0, start = 0;
  alloc_mode_e mode_i = MODE_HORIZONTAL, acc_mode;
  logic [$clog2(R)-1:0] reg_i = '0;
  logic busy, done, shift_up, h_acc, v_acc;
  logic [N-1:0] shift_en;
  logic [$clog2(N)-1:0] h_track;
  logic [0:0] v_group, h_part;
  logic [31:0] acc_shifts;
  logic signed [OW-1:0] glob_off;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  shift_gen dut (.*);

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  int g = 0;
  task automatic run(input alloc_mode_e m, input int r);
    int off [N];
    int nacc = 0, cycles = 0, other = 0, minoff = 0, maxoff = 0, total = 0;
    foreach (off[t]) off[t] = g;
    @(negedge clk);
    mode_i = m; reg_i = r[$clog2(R)-1:0]; start = 1;
    @(posedge clk);
    #1 start = 0;
    minoff = g; maxoff = g;
    while (!done) begin
      cycles++;
      if (h_acc || v_acc) nacc++;
      if (m == MODE_HORIZONTAL && h_acc) check(off[r] == -S/2 + nacc - 1, "horizontal access order");
      for (int t = 0; t < N; t++) if (shift_en[t]) begin
        off[t] += shift_up ? 1 : -1;
        total++;
        if (m == MODE_HORIZONTAL && t != r) other++;
      end
      if (off[r] < minoff) minoff = off[r];
      if (off[r] > maxoff) maxoff = off[r];
      @(posedge clk); #1;
    end
    check(acc_shifts == 32'(total), "acc_shifts equals pulses");
    if (m == MODE_HORIZONTAL) begin
      check(other == 0, "only the register's track shifts");
      check(nacc == S, "one access per position");
      check(off[r] == g, "track returns to resting offset");
      check(minoff == -S/2 && maxoff == S - 1 - S/2, "walk covers the span");
      check(h_track == r[$clog2(N)-1:0], "track select");
    end else begin
      int tgt = r / G - S/2;
      check(nacc == 1, "one vertical access");
      for (int t = 0; t < N; t++) check(off[t] == tgt, "synchronous vertical shift");
      check(total == (tgt > g ? tgt - g : g - tgt) * N, "vertical shift count");
      check(int'(v_group) == r % G, "vertical group");
      g = tgt;
    end
    check(int'(glob_off) == g, "global offset");
    check(cycles == total / (m == MODE_VERTICAL ? N : 1) + nacc, "one shift or access per cycle");
    @(posedge clk); #1 check(!busy, "idle after done");
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 300; i++)
      run($urandom_range(1) ? MODE_VERTICAL : MODE_HORIZONTAL, $urandom_range(R - 1));
    run(MODE_VERTICAL, 0);
    run(MODE_VERTICAL, R - 1);
    run(MODE_HORIZONTAL, 5);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
