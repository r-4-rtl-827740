// rec_peripheral: recommendation peripheral that requests allocation changes.
//
// The offline analysis stores one recommendation bit per instruction.  This
// peripheral counts executed instructions; after every WINDOW of them it reads
// the recommendation bit of the current program counter from the
// recommendation memory and compares it with the active allocation mode.  If
// they differ it raises an interrupt; the handler only has to flip the mode
// bit of the system configuration register (its register save and restore
// reformats the register contents).
//
// Interface: retire is high for one cycle per executed instruction and pc is
// then the address of the next instruction to execute.  The peripheral reads
// rec_rom at (pc - TEXT_BASE)/4 (rom_rd_en/rom_rd_addr, data rom_rd_bit one
// cycle later) and compares in that cycle.  irq is a level that stays high
// until irq_ack.  A program counter outside the covered text segment gives no
// recommendation.  checks and requests count window ends and raised
// interrupts.  Taking the next pc, the level interrupt with acknowledge, the
// text base and the counters are this design's choices.
//
// From the paper: trigger after a fixed number of instructions, load the bit of
// the current program counter, compare with the active mode, interrupt on a
// mismatch.  Own choices: the pc is the next instruction to execute, the
// interrupt is a level held until irq_ack, pcs outside the covered text give
// no check, and the counters.
module rec_peripheral
  import r4_pkg::*;
#(
  parameter int unsigned WIN       = WINDOW,
  parameter int unsigned DEPTH     = TEXT_INSNS,
  parameter logic [31:0] TEXT_BASE = 32'h0000_0000,
  localparam int unsigned AW       = idx_w(DEPTH),
  localparam int unsigned CW       = idx_w(WIN)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          retire,
  input  logic [31:0]   pc,
  input  alloc_mode_e   cur_mode,
  output logic          rom_rd_en,
  output logic [AW-1:0] rom_rd_addr,
  input  logic          rom_rd_bit,
  output logic          irq,
  input  logic          irq_ack,
  output alloc_mode_e   last_rec,
  output logic [31:0]   checks,
  output logic [31:0]   requests
);

  logic [CW-1:0] cnt;
  logic          window_end, in_text, pending;
  logic [31:0]   idx;

  assign idx         = (pc - TEXT_BASE) >> 2;
  assign in_text     = ((pc - TEXT_BASE) < 32'(DEPTH * 4)) && (pc[1:0] == 2'b00);
  assign window_end  = retire && (cnt == CW'(WIN - 1));
  assign rom_rd_en   = window_end && in_text;
  assign rom_rd_addr = AW'(idx);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt      <= '0;
      pending  <= 1'b0;
      irq      <= 1'b0;
      last_rec <= MODE_HORIZONTAL;
      checks   <= '0;
      requests <= '0;
    end else begin
      if (retire) cnt <= window_end ? '0 : cnt + CW'(1);
      pending <= rom_rd_en;
      if (pending) begin
        checks   <= checks + 32'd1;
        last_rec <= alloc_mode_e'(rom_rd_bit);
      end
      if (pending && (alloc_mode_e'(rom_rd_bit) != cur_mode)) begin
        irq      <= 1'b1;
        requests <= requests + 32'd1;
      end else if (irq_ack) begin
        irq <= 1'b0;
      end
    end
  end

endmodule
