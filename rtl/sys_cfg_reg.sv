// sys_cfg_reg: system configuration register holding the allocation mode bit.
//
// The allocation mode of the racetrack register file must stay constant until
// system software changes it, so it is kept in a central configuration
// register that only software writes.  The intended use is inside an interrupt
// handler: save registers, flip the bit, restore registers, so that the
// restore writes them in the new allocation.
//
// Interface: a software write (csr_we, csr_wdata[0]) sets the mode bit on the
// next clock edge; csr_rdata reads it back in bit 0.  mode_o drives the mode
// input of the register file, which samples it at the start of each access,
// so a change takes effect with the first access after the write.
// mode_changes counts writes that changed the bit.  The register layout,
// the reset value (RESET_MODE, horizontal) and the change counter are this
// design's choices.
//
// Timing: a write takes effect at the next clock edge; csr_rdata is combinational.
// From the paper: a central configuration register that holds the allocation
// mode bit until software changes it.  Own choices: bit 0 as the mode, reset to
// horizontal, and the counter of mode changes.
module sys_cfg_reg
  import r4_pkg::*;
#(
  parameter alloc_mode_e RESET_MODE = MODE_HORIZONTAL
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        csr_we,
  input  logic [31:0] csr_wdata,
  output logic [31:0] csr_rdata,
  output alloc_mode_e mode_o,
  output logic [31:0] mode_changes
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mode_o       <= RESET_MODE;
      mode_changes <= '0;
    end else if (csr_we) begin
      mode_o <= alloc_mode_e'(csr_wdata[0]);
      if (csr_wdata[0] != mode_o) mode_changes <= mode_changes + 32'd1;
    end
  end

  assign csr_rdata = {31'd0, mode_o};

endmodule
