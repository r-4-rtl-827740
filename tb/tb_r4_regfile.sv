// tb_r4_regfile: self-checking testbench of the racetrack register file at its
// default size (32 x 64-bit registers, 32 tracks of 64 positions, 2 ports).
//
// A reference array of register values is kept in the testbench.  In each
// allocation mode all registers are first written (as the restore after a
// mode change would), then random reads and writes follow.  Every read is
// compared with the reference, and for every access the number of track
// shift pulses and the latency are compared with values computed here from
// the architecture's shift cost model:
//   horizontal: from resting offset g, |g + S/2| + (S-1) + (S-1-S/2-g),
//               i.e. 2*(S-1) at g = 0, where S = positions per access port
//   vertical:   |slot(r) - slot(r_old)| * N, slot(r) = r / groups
// and latency = shifts(per track) + accesses + 1 completion cycle.
//
// The expected shift counts are the paper's formulas S_h and S_v; the latency
// and the request protocol are this design's.
module tb_r4_regfile;
  import r4_pkg::*;

  localparam int R = NUM_REGS, B = REG_BITS, N = NUM_TRACKS, W = TRACK_POS, NAP = NUM_AP;
  localparam int S = W / NAP, G = NAP * N / B;
  localparam int OW = $clog2(S) + 2;

  logic clk = 0, rst_n = 0;
  alloc_mode_e mode;
  logic req_valid = 0, req_ready, req_we = 0, resp_valid;
  logic [$clog2(R)-1:0] req_reg = '0;
  logic [B-1:0] req_wdata = '0, resp_rdata;
  logic [31:0] resp_shifts;
  alloc_mode_e acc_mode;
  logic signed [OW-1:0] glob_off;

  int checks = 0, failures = 0;
  logic [B-1:0] ref_regs [R];
  int g;   // resting offset predicted by the model

  always #5 clk = ~clk;

  r4_regfile dut (.*, .mode_i(mode));

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int iabs(int x); return x < 0 ? -x : x; endfunction

  task automatic access(input bit we, input int r, input logic [B-1:0] wd);
    int exp_sh, exp_lat, lat, per_track;
    @(negedge clk);
    req_valid = 1; req_we = we; req_reg = r[$clog2(R)-1:0]; req_wdata = wd;
    while (!req_ready) @(negedge clk);
    @(posedge clk);  // accepted here
    #1 req_valid = 0;
    lat = 0;
    do begin @(posedge clk); lat++; #1; end while (!resp_valid);
    if (mode == MODE_HORIZONTAL) begin
      per_track = iabs(g + S/2) + (S - 1) + iabs(S - 1 - S/2 - g);
      exp_sh  = per_track;
      exp_lat = per_track + S;
    end else begin
      per_track = iabs((r / G - S/2) - g);
      exp_sh  = per_track * N;
      exp_lat = per_track + 1;
      g = r / G - S/2;
    end
    checks++;
    if (resp_shifts != 32'(exp_sh)) begin
      failures++;
      $display("shift count mode=%0d r=%0d: got %0d expected %0d", mode, r, resp_shifts, exp_sh);
    end
    checks++;
    if (lat != exp_lat) begin
      failures++;
      $display("latency mode=%0d r=%0d: got %0d expected %0d", mode, r, lat, exp_lat);
    end
    if (we) ref_regs[r] = wd;
    else begin
      checks++;
      if (resp_rdata != ref_regs[r]) begin
        failures++;
        $display("read mode=%0d r=%0d: got %h expected %h", mode, r, resp_rdata, ref_regs[r]);
      end
    end
    checks++;
    if (int'(glob_off) != g) begin
      failures++;
      $display("resting offset: got %0d expected %0d", glob_off, g);
    end
  endtask

  function automatic logic [B-1:0] rnd();
    return {$urandom, $urandom};
  endfunction

  initial begin
    mode = MODE_HORIZONTAL;
    g = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int pass = 0; pass < 4; pass++) begin
      mode = (pass % 2) ? MODE_VERTICAL : MODE_HORIZONTAL;
      // restore all registers in the new allocation
      for (int r = 0; r < R; r++) access(1, r, rnd());
      for (int r = 0; r < R; r++) access(0, r, '0);
      // random mixture, with repeated accesses to a few registers
      for (int i = 0; i < 200; i++) begin
        automatic int r = (i % 3 == 0) ? int'($urandom_range(R-1)) : int'($urandom_range(3));
        if ($urandom_range(1)) access(1, r, rnd());
        else                   access(0, r, '0);
      end
      for (int r = R - 1; r >= 0; r--) access(0, r, '0);
    end
    // special values
    mode = MODE_VERTICAL;
    for (int r = 0; r < R; r++) access(1, r, (r % 2) ? '1 : '0);
    for (int r = 0; r < R; r++) access(0, r, '0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
