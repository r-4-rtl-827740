// rf_sweep_unit: one register file of the access-port sweep with its own
// stimulus and checker.  It runs the same kind of random access sequence as
// tb_r4_regfile (restore all registers per mode, reads and writes with some
// locality) on a register file with NAP access ports and N tracks of W
// positions, and checks read data, shift counts and latency against the
// shift cost model:
//   horizontal 2*(S-1)*max(1,B/W) shifts from resting offset 0, S = W/NAP,
//   vertical   |slot - old slot| * N with slot = r / (NAP*N/B).
// It reports its totals on its ports when done is high, and adds the shift
// pulses of each mode so that the sweep can show the trend.
//
// Timing: one request at a time, each followed by a wait for resp_valid.
// The expected shift counts are the paper's cost formulas (S_h, S_v); the
// random access sequence and the latency expectation are this bench's own.
module rf_sweep_unit
  import r4_pkg::*;
#(
  parameter int unsigned NAP = NUM_AP,
  parameter int unsigned N = NUM_TRACKS,
  parameter int unsigned W = TRACK_POS,
  parameter int unsigned SEED = 1
) (
  input  logic        clk,
  input  logic        rst_n,
  output logic        done,
  output int          checks,
  output int          failures,
  output longint      h_shifts,
  output longint      v_shifts
);
  localparam int R = NUM_REGS, B = REG_BITS;
  localparam int S = W / NAP, G = NAP * N / B, TPR = max1(B / W);
  localparam int OW = $clog2(S) + 2;

  alloc_mode_e mode = MODE_HORIZONTAL;
  logic req_valid = 0, req_ready, req_we = 0, resp_valid;
  logic [$clog2(R)-1:0] req_reg = '0;
  logic [B-1:0] req_wdata = '0, resp_rdata;
  logic [31:0] resp_shifts;
  alloc_mode_e acc_mode;
  logic signed [OW-1:0] glob_off;
  logic [B-1:0] ref_regs [R];
  int g = 0;

  r4_regfile #(.N(N), .W(W), .NAP(NAP)) dut (.*, .mode_i(mode));

  function automatic int iabs(int x); return x < 0 ? -x : x; endfunction

  task automatic access(input bit we, input int r, input logic [B-1:0] wd);
    int exp_sh, exp_lat, lat, per_track;
    @(negedge clk);
    req_valid = 1; req_we = we; req_reg = r[$clog2(R)-1:0]; req_wdata = wd;
    while (!req_ready) @(negedge clk);
    @(posedge clk);
    #1 req_valid = 0;
    lat = 0;
    do begin @(posedge clk); lat++; #1; end while (!resp_valid);
    if (mode == MODE_HORIZONTAL) begin
      per_track = iabs(g + S/2) + (S - 1) + iabs(S - 1 - S/2 - g);
      exp_sh = per_track * TPR; exp_lat = per_track + S * TPR;
      h_shifts += longint'(resp_shifts);
    end else begin
      per_track = iabs((r / G - S/2) - g);
      exp_sh = per_track * N; exp_lat = per_track + 1;
      g = r / G - S/2;
      v_shifts += longint'(resp_shifts);
    end
    checks++;
    if (resp_shifts != 32'(exp_sh) || lat != exp_lat) begin
      failures++;
      $display("NAP=%0d N=%0d mode=%0d r=%0d shifts %0d/%0d latency %0d/%0d",
               NAP, N, mode, r, resp_shifts, exp_sh, lat, exp_lat);
    end
    if (we) ref_regs[r] = wd;
    else begin
      checks++;
      if (resp_rdata != ref_regs[r]) begin
        failures++;
        $display("NAP=%0d read r=%0d wrong", NAP, r);
      end
    end
  endtask

  initial begin
    automatic int unsigned seed = SEED;
    done = 0; checks = 0; failures = 0; h_shifts = 0; v_shifts = 0;
    @(posedge rst_n);
    for (int pass = 0; pass < 2; pass++) begin
      mode = pass ? MODE_VERTICAL : MODE_HORIZONTAL;
      for (int r = 0; r < R; r++) access(1, r, {$urandom(seed + r), $urandom});
      for (int i = 0; i < 150; i++) begin
        automatic int r = (i % 3 == 0) ? int'($urandom_range(R-1)) : int'($urandom_range(3));
        if ($urandom_range(1)) access(1, r, {$urandom, $urandom});
        else                   access(0, r, '0);
      end
      for (int r = 0; r < R; r++) access(0, r, '0);
    end
    done = 1;
  end
endmodule
