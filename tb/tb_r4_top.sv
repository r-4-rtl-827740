// tb_r4_top: end-to-end test of the racetrack register file with runtime
// reconfiguration, at the default size.
//
// A small in-order CPU model executes a synthetic program of 4000
// instructions at consecutive addresses.  Each instruction reads two source
// registers and writes one destination register, in that order.  The program
// alternates between phases that reuse a few registers and phases that touch
// all 32.  The recommendation memory is loaded with 1 (vertical) for the
// instructions of the first kind of phase and 0 (horizontal) for the second.
// When the recommendation peripheral raises its interrupt, the handler model
// reads all registers out (save), flips the mode bit through the
// configuration register, writes them back (restore) and acknowledges.
//
// Checked: every register read against a reference copy, every access's
// shift count against the shift cost model, interrupts raised exactly when
// the recommendation differs from the mode, and that the mode follows the
// recommendations.  Counted, and required to happen at least once:
// horizontal accesses, vertical accesses with and without track shifts,
// window checks with and without an interrupt, mode switches both ways.
//
// Timing: one instruction per cycle at most; the handler model waits for each
// register access to complete.  From the paper: the window check, interrupt
// and save/flip/restore handler.  Own choices: the phase pattern of
// recommendation bits and the instruction mix.
module tb_r4_top;
  import r4_pkg::*;

  localparam int R = NUM_REGS, B = REG_BITS, N = NUM_TRACKS, W = TRACK_POS, NAP = NUM_AP;
  localparam int S = W / NAP, G = NAP * N / B, OW = $clog2(S) + 2;
  localparam int DEPTH = TEXT_INSNS, NINSN = 4000, PHASE = 250;

  logic clk = 0, rst_n = 0;
  logic req_valid = 0, req_ready, req_we = 0, resp_valid;
  logic [$clog2(R)-1:0] req_reg = '0;
  logic [B-1:0] req_wdata = '0, resp_rdata;
  logic [31:0] resp_shifts, csr_wdata = '0, csr_rdata, mode_changes, pc = '0;
  logic [31:0] rec_checks, rec_requests, ld_data = '0;
  alloc_mode_e acc_mode, mode, last_rec;
  logic signed [OW-1:0] glob_off;
  logic csr_we = 0, retire = 0, irq, irq_ack = 0, ld_we = 0;
  logic [$clog2(DEPTH/32)-1:0] ld_addr = '0;

  int checks = 0, failures = 0;
  int n_h = 0, n_v_shift = 0, n_v_noshift = 0, n_irq = 0, n_to_v = 0, n_to_h = 0;
  logic [B-1:0] ref_regs [R];
  logic [B-1:0] saved [R];
  int g = 0;

  always #5 clk = ~clk;

  r4_top dut (.*);

  initial begin
    #50000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic bit rec_of(int i); return ((i / PHASE) % 2) == 0; endfunction
  function automatic int iabs(int x); return x < 0 ? -x : x; endfunction

  task automatic chk(input bit c, input string what);
    checks++;
    if (!c) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  task automatic access(input bit we, input int r, input logic [B-1:0] wd, output logic [B-1:0] rd);
    int exp_sh;
    @(negedge clk);
    req_valid = 1; req_we = we; req_reg = r[$clog2(R)-1:0]; req_wdata = wd;
    while (!req_ready) @(negedge clk);
    @(posedge clk);
    #1 req_valid = 0;
    do begin @(posedge clk); #1; end while (!resp_valid);
    if (mode == MODE_HORIZONTAL) begin
      exp_sh = iabs(g + S/2) + (S - 1) + iabs(S - 1 - S/2 - g);
      n_h++;
    end else begin
      exp_sh = iabs((r / G - S/2) - g) * N;
      g = r / G - S/2;
      if (exp_sh == 0) n_v_noshift++; else n_v_shift++;
    end
    chk(resp_shifts == 32'(exp_sh), $sformatf("shift count r=%0d mode=%0d", r, mode));
    rd = resp_rdata;
    if (we) ref_regs[r] = wd;
    else chk(rd == ref_regs[r], $sformatf("read r=%0d mode=%0d", r, mode));
  endtask

  task automatic handler();
    logic [B-1:0] dummy;
    alloc_mode_e newm;
    n_irq++;
    for (int r = 0; r < R; r++) access(0, r, '0, saved[r]);
    newm = alloc_mode_e'(~csr_rdata[0]);
    @(negedge clk); csr_we = 1; csr_wdata = {31'd0, newm};
    @(negedge clk); csr_we = 0;
    chk(mode == newm, "mode written");
    if (newm == MODE_VERTICAL) n_to_v++; else n_to_h++;
    for (int r = 0; r < R; r++) access(1, r, saved[r], dummy);
    @(negedge clk); irq_ack = 1;
    @(negedge clk); irq_ack = 0;
  endtask

  initial begin
    logic [B-1:0] rd;
    // program load: recommendation bits
    for (int w = 0; w < DEPTH / 32; w++) begin
      @(negedge clk);
      ld_we = 1; ld_addr = w[$clog2(DEPTH/32)-1:0];
      for (int i = 0; i < 32; i++) ld_data[i] = rec_of(32 * w + i);
    end
    @(negedge clk) ld_we = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // initial register contents
    for (int r = 0; r < R; r++) access(1, r, {$urandom, $urandom}, rd);
    for (int i = 0; i < NINSN; i++) begin
      automatic bit local_phase = rec_of(i);
      automatic int s1, s2, d;
      if (local_phase) begin
        s1 = $urandom_range(1); s2 = $urandom_range(1); d = $urandom_range(1);
      end else begin
        s1 = $urandom_range(R - 1); s2 = $urandom_range(R - 1); d = $urandom_range(R - 1);
      end
      access(0, s1, '0, rd);
      access(0, s2, '0, rd);
      access(1, d, {$urandom, $urandom} ^ rd, rd);
      // retire; pc names the next instruction
      @(negedge clk); retire = 1; pc = 32'((i + 1) * 4);
      @(negedge clk); retire = 0;
      @(negedge clk);
      if ((i + 1) % WINDOW == 0) begin
        chk(irq == (rec_of(i + 1) != mode), $sformatf("irq after instruction %0d", i));
        if (irq) handler();
        chk(mode == alloc_mode_e'(rec_of(i + 1)), "mode follows recommendation");
      end else chk(!irq, $sformatf("no irq inside a window i=%0d mode=%0d rec=%0d", i, mode, last_rec));
    end
    for (int r = 0; r < R; r++) access(0, r, '0, rd);
    chk(rec_checks == 32'(NINSN / WINDOW), "window checks");
    chk(rec_requests == 32'(n_irq), "interrupt count");
    chk(mode_changes == 32'(n_irq), "mode change count");
    $display("horizontal accesses %0d, vertical with shifts %0d, vertical without shifts %0d",
             n_h, n_v_shift, n_v_noshift);
    $display("window checks %0d, interrupts %0d, switches to vertical %0d, to horizontal %0d",
             rec_checks, n_irq, n_to_v, n_to_h);
    chk(n_h > 0, "horizontal access happened");
    chk(n_v_shift > 0, "vertical access with shifts happened");
    chk(n_v_noshift > 0, "vertical access without shifts happened");
    chk(n_irq > 0, "reconfiguration interrupt happened");
    chk(int'(rec_checks) > n_irq, "window check without interrupt happened");
    chk(n_to_v > 0 && n_to_h > 0, "mode switched both ways");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
