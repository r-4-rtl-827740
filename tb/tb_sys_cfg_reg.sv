// tb_sys_cfg_reg: checks reset value, software writes and read-back of the
// mode bit, and the count of writes that changed it.
//
// Timing: writes at the negative edge, checked after the next positive edge.
// The mode register is the paper's; its reset value and counter are this
// design's.
module tb_sys_cfg_reg;
  import r4_pkg::*;
  logic clk = 0, rst_n = 0, csr_we = 0;
  logic [31:0] csr_wdata = '0, csr_rdata, mode_changes;
  alloc_mode_e mode_o, refm;
  int checks = 0, failures = 0, changes = 0;

  always #5 clk = ~clk;
  sys_cfg_reg dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    refm = MODE_HORIZONTAL;
    #1 checks++;
    if (mode_o !== MODE_HORIZONTAL) failures++;
    for (int it = 0; it < 200; it++) begin
      @(negedge clk);
      csr_we = 1'($urandom_range(1));
      csr_wdata = $urandom;
      @(posedge clk); #1;
      if (csr_we) begin
        if (alloc_mode_e'(csr_wdata[0]) != refm) changes++;
        refm = alloc_mode_e'(csr_wdata[0]);
      end
      checks++;
      if (mode_o !== refm || csr_rdata !== {31'd0, refm}) failures++;
      checks++;
      if (mode_changes != 32'(changes)) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
