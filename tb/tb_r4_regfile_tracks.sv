// tb_r4_regfile_tracks: the nanotrack-count sweep of the architecture's
// evaluation: 2048 bits of register storage in 8, 16, 32, 64, 128 or 256
// tracks of 256 down to 8 positions, 8 access ports each.  This covers a
// register spread over several tracks (W < B), several registers per track
// (W > B), and several registers per vertical position (N > B).  Each
// register file runs random access sequences in both allocations and checks
// data, shift counts and latency against the shift cost model.  The test also
// checks that the horizontal shift pulses per access fall as tracks get
// shorter, as the cost model predicts.
//
// Timing: as rf_sweep_unit.  The points 8..256 tracks with 2048/N positions and
// 8 ports are those of the paper's nanotrack study.
module tb_r4_regfile_tracks;
  localparam int NS = 6;
  localparam int NT [NS] = '{8, 16, 32, 64, 128, 256};
  logic clk = 0, rst_n = 0;
  logic [NS-1:0] done;
  int c [NS], f [NS];
  longint hs [NS], vs [NS];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  for (genvar i = 0; i < NS; i++) begin : g_unit
    rf_sweep_unit #(.NAP(8), .N(NT[i]), .W(2048 / NT[i]), .SEED(i + 11)) u (
      .clk, .rst_n, .done(done[i]), .checks(c[i]), .failures(f[i]),
      .h_shifts(hs[i]), .v_shifts(vs[i]));
  end

  initial begin
    #20000000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (&done);
    for (int i = 0; i < NS; i++) begin
      checks += c[i];
      failures += f[i];
      $display("tracks %0d x %0d positions: horizontal shift pulses %0d, vertical shift pulses %0d",
               NT[i], 2048 / NT[i], hs[i], vs[i]);
    end
    for (int i = 1; i < NS; i++) begin
      checks++;
      if (hs[i] >= hs[i-1]) begin failures++; $display("horizontal shifts do not fall"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
