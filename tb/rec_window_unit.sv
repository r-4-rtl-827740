// rec_window_unit: one point of the window-size study, run on the whole
// design (r4_top) with 8 access ports and a recommendation window of WIN
// instructions.  Used by tb_r4_window_sweep; not a testbench on its own.
//
// A CPU model retires NINSN instructions at consecutive addresses with
// random gaps, and each instruction makes one random register read or write
// (checked against a reference copy).  The recommendation memory holds a
// random bit per instruction, kept here too, except at window ends, where
// the bits run 1,1,0,0,... so that both outcomes of a check occur.  On
// every WIN-th retirement the model works out the expected recommendation
// of the next pc and checks that irq is low one cycle after the retirement
// edge and high two cycles
// after it exactly when the recommendation differs from the mode.  An
// interrupt is served as the software would: read all registers (save),
// write the flipped mode bit, write them back (restore), acknowledge.  At
// the end rec_checks and rec_requests must equal the model's counts, and
// windows with and without an interrupt must both have happened.
//
// Interface: parameters WIN and SEED; outputs checks, failures and done.
// Timing: inputs change at negative edges; one access at a time.
// From the paper: 8 ports and windows 10..2000 of the window study, the
// check of the current pc's bit and the interrupt on a mismatch.  Own
// choices: random recommendation bits, the instruction mix, the 8192-entry
// recommendation memory and the irq timing checked (that of this design).
module rec_window_unit #(
  parameter int WIN  = 100,
  parameter int SEED = 1
) (
  input  logic clk,
  input  logic rst_n,
  output int   checks,
  output int   failures,
  output logic done
);
  import r4_pkg::*;
  localparam int R = NUM_REGS, B = REG_BITS, NAP = 8, DEPTH = 8192;
  localparam int NINSN = (3 * WIN + WIN / 2 > 600) ? 3 * WIN + WIN / 2 : 600;
  localparam int RW = idx_w(R), WAW = idx_w(DEPTH / 32);
  localparam int OW = $clog2(TRACK_POS / NAP) + 2;

  logic req_valid = 0, req_ready, req_we = 0, resp_valid;
  logic [RW-1:0] req_reg = '0;
  logic [B-1:0] req_wdata = '0, resp_rdata;
  logic [31:0] resp_shifts, csr_wdata = '0, csr_rdata, mode_changes, pc = '0;
  logic [31:0] rec_checks, rec_requests;
  alloc_mode_e acc_mode, mode, last_rec;
  logic signed [OW-1:0] glob_off;
  logic csr_we = 0, retire = 0, irq, irq_ack = 0, ld_we = 0;
  logic [WAW-1:0] ld_addr = '0;
  logic [31:0] ld_data = '0;

  r4_top #(.NAP(NAP), .WIN(WIN), .DEPTH(DEPTH)) dut (.*);

  logic [B-1:0] ref_reg [R];
  bit rec [DEPTH];
  int windows = 0, irqs = 0, quiet = 0;

  task automatic access(input bit we, input int r, input logic [B-1:0] wd,
                        output logic [B-1:0] rd);
    @(negedge clk);
    while (!req_ready) @(negedge clk);
    req_valid = 1; req_we = we; req_reg = RW'(r); req_wdata = wd;
    @(negedge clk);
    req_valid = 0;
    while (!resp_valid) @(negedge clk);
    rd = resp_rdata;
  endtask

  task automatic serve_irq();
    logic [B-1:0] saved [R];
    logic [B-1:0] rd;
    for (int r = 0; r < R; r++) access(1'b0, r, '0, saved[r]);
    @(negedge clk); csr_we = 1; csr_wdata = {31'd0, ~mode};
    @(negedge clk); csr_we = 0;
    for (int r = 0; r < R; r++) access(1'b1, r, saved[r], rd);
    @(negedge clk); irq_ack = 1;
    @(negedge clk); irq_ack = 0;
  endtask

  initial begin
    logic [B-1:0] rd;
    checks = 0; failures = 0; done = 0;
    void'($urandom(SEED));
    for (int i = 0; i < DEPTH; i++) rec[i] = 1'($urandom);
    // at window ends the bits run 1,1,0,0,1,1,...: starting from horizontal,
    // windows alternate between an interrupt and none whatever the seed
    for (int k = 1; k * WIN < DEPTH; k++) rec[k * WIN] = ((k - 1) / 2) % 2 == 0;
    for (int w = 0; w < DEPTH / 32; w++) begin
      @(negedge clk);
      ld_we = 1; ld_addr = WAW'(w);
      for (int i = 0; i < 32; i++) ld_data[i] = rec[32 * w + i];
    end
    @(negedge clk) ld_we = 0;
    wait (rst_n);
    for (int r = 0; r < R; r++) begin
      ref_reg[r] = {$urandom, $urandom};
      access(1'b1, r, ref_reg[r], rd);
    end
    for (int i = 0; i < NINSN; i++) begin
      automatic int r = $urandom_range(R - 1);
      automatic bit expect_irq;
      if ($urandom_range(1) == 1) begin
        ref_reg[r] = {$urandom, $urandom};
        access(1'b1, r, ref_reg[r], rd);
      end else begin
        access(1'b0, r, '0, rd);
        checks++;
        if (rd !== ref_reg[r]) begin
          failures++;
          if (failures < 5) $display("WIN=%0d r%0d read %h expected %h", WIN, r, rd, ref_reg[r]);
        end
      end
      repeat ($urandom_range(2)) @(negedge clk);
      @(negedge clk); retire = 1; pc = 32'((i + 1) * 4);
      @(negedge clk); retire = 0;
      if ((i + 1) % WIN == 0) begin
        windows++;
        expect_irq = rec[i + 1] != bit'(mode);
        checks++;
        if (irq) begin
          failures++;
          $display("WIN=%0d irq one cycle after retirement", WIN);
        end
        @(negedge clk);
        checks++;
        if (irq !== expect_irq) begin
          failures++;
          $display("WIN=%0d window %0d irq %0d expected %0d", WIN, windows, irq, expect_irq);
        end
        if (irq) begin
          irqs++;
          serve_irq();
        end else quiet++;
      end else begin
        @(negedge clk);
        checks++;
        if (irq) begin
          failures++;
          $display("WIN=%0d irq outside a window end (insn %0d)", WIN, i);
        end
      end
    end
    checks += 2;
    if (rec_checks != 32'(windows)) begin
      failures++;
      $display("WIN=%0d rec_checks %0d expected %0d", WIN, rec_checks, windows);
    end
    if (rec_requests != 32'(irqs)) begin
      failures++;
      $display("WIN=%0d rec_requests %0d expected %0d", WIN, rec_requests, irqs);
    end
    for (int r = 0; r < R; r++) begin
      access(1'b0, r, '0, rd);
      checks++;
      if (rd !== ref_reg[r]) failures++;
    end
    checks += 2;
    if (irqs == 0) begin failures++; $display("WIN=%0d no interrupt", WIN); end
    if (quiet == 0) begin failures++; $display("WIN=%0d no quiet window", WIN); end
    $display("WIN=%0d instructions %0d windows %0d interrupts %0d", WIN, NINSN, windows, irqs);
    done = 1;
  end
endmodule
