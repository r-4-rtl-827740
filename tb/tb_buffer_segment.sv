// tb_buffer_segment: checks parallel load, serial fill by right rolls,
// non-destructive right and left rolls with their serial outputs, and load
// priority, against a reference value kept in the testbench.
//
// Timing: inputs change at the negative edge and are checked after the next
// positive edge.  The roll behaviour checked is the paper's bidirectional roll;
// the bit order is this design's.
module tb_buffer_segment;
  import r4_pkg::*;
  localparam int SEG = REG_BITS / NUM_AP;
  logic clk = 0, rst_n = 0, load = 0, roll = 0, roll_left = 0, ser_take = 0, ser_in = 0, ser_out;
  logic [SEG-1:0] d = '0, q, refq;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  buffer_segment dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input logic [SEG-1:0] exp, input string what);
    checks++;
    if (q !== exp) begin failures++; $display("%s: got %h expected %h", what, q, exp); end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 50; it++) begin
      // parallel load
      @(negedge clk); refq = $urandom; d = refq; load = 1; roll = $urandom_range(1);
      @(negedge clk); load = 0; roll = 0;
      chk(refq, "load");
      // right roll SEG times, serial out must give bits 0..SEG-1, contents unchanged
      for (int j = 0; j < SEG; j++) begin
        roll = 1; roll_left = 0; ser_take = 0;
        #1 checks++;
        if (ser_out !== refq[j]) failures++;
        @(negedge clk);
      end
      roll = 0;
      chk(refq, "full right roll");
      // left roll once
      roll = 1; roll_left = 1;
      #1 checks++;
      if (ser_out !== refq[SEG-1]) failures++;
      @(negedge clk); roll = 0;
      chk({refq[SEG-2:0], refq[SEG-1]}, "left roll");
      // serial fill with right rolls: bit j taken at step j lands at q[j]
      refq = $urandom;
      for (int j = 0; j < SEG; j++) begin
        roll = 1; roll_left = 0; ser_take = 1; ser_in = refq[j];
        @(negedge clk);
      end
      roll = 0; ser_take = 0;
      chk(refq, "serial fill");
      // serial fill from the other end with left rolls
      for (int j = SEG - 1; j >= 0; j--) begin
        roll = 1; roll_left = 1; ser_take = 1; ser_in = ~refq[j];
        @(negedge clk);
      end
      roll = 0; roll_left = 0; ser_take = 0;
      chk(~refq, "left serial fill");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
