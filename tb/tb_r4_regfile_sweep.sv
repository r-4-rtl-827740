// tb_r4_regfile_sweep: the access-port sweep of the architecture's
// evaluation (64-position tracks, 32 tracks, 2 to 64 access ports).  Six
// register files with 2, 4, 8, 16, 32 and 64 access ports run random access
// sequences in both allocations; each checks data, shift counts and latency
// against the shift cost model.  The testbench also checks that the shift
// pulses per access fall as the number of ports grows, as the cost model
// predicts for both allocations.
//
// Timing: as rf_sweep_unit.  The sweep points 2..64 ports are those of the
// paper's access-port study.
module tb_r4_regfile_sweep;
  localparam int NS = 6;
  localparam int NAPS [NS] = '{2, 4, 8, 16, 32, 64};
  logic clk = 0, rst_n = 0;
  logic [NS-1:0] done;
  int c [NS], f [NS];
  longint hs [NS], vs [NS];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  for (genvar i = 0; i < NS; i++) begin : g_unit
    rf_sweep_unit #(.NAP(NAPS[i]), .SEED(i + 1)) u (
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
      $display("ports %0d: horizontal shift pulses %0d, vertical shift pulses %0d",
               NAPS[i], hs[i], vs[i]);
    end
    for (int i = 1; i < NS; i++) begin
      checks++;
      if (hs[i] >= hs[i-1]) begin failures++; $display("horizontal shifts do not fall"); end
    end
    checks++;
    if (hs[NS-1] != 0 || vs[NS-1] != 0) begin
      failures++;
      $display("with one port per position no shifts are expected");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
