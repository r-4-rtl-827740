// tb_r4_window_sweep: the window-size study on the whole design.  Runs
// rec_window_unit (r4_top with 8 access ports) at windows of 10, 100 and 2000
// instructions, the ends and middle of the range the paper explores, and
// sums their checks.
// Timing: 10 ns clock, reset released after 3 cycles; a watchdog ends the run
// after 20 ms of simulated time.  The window values are the paper's; the
// stimulus is this bench's own (see rec_window_unit).
module tb_r4_window_sweep;
  logic clk = 0, rst_n = 0;
  int c10, f10, c100, f100, c2000, f2000;
  logic d10, d100, d2000;

  always #5 clk = ~clk;

  rec_window_unit #(.WIN(10),   .SEED(11)) u10   (.clk, .rst_n, .checks(c10),   .failures(f10),   .done(d10));
  rec_window_unit #(.WIN(100),  .SEED(12)) u100  (.clk, .rst_n, .checks(c100),  .failures(f100),  .done(d100));
  rec_window_unit #(.WIN(2000), .SEED(13)) u2000 (.clk, .rst_n, .checks(c2000), .failures(f2000), .done(d2000));

  initial begin
    #20000000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", c10 + c100 + c2000, f10 + f100 + f2000 + 1);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (d10 && d100 && d2000);
    $display("TB_RESULT checks=%0d failures=%0d", c10 + c100 + c2000, f10 + f100 + f2000);
    $finish;
  end
endmodule
