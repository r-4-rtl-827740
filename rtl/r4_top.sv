// r4_top: racetrack register file with runtime software reconfiguration.
//
// Joins the racetrack register file to the hardware that lets software switch
// its allocation at run time:
//   sys_cfg_reg     holds the allocation mode bit and feeds the register file
//   rec_rom         holds one recommendation bit per instruction
//   rec_peripheral  every WIN executed instructions compares the
//                   recommendation of the current pc with the mode bit and
//                   raises irq when they differ
// The CPU itself is outside this module: its pipeline drives the register
// port (req_*/resp_*), its retirement drives retire/pc, its interrupt handler
// answers irq by saving the registers, writing the flipped mode bit through
// csr_we/csr_wdata, restoring the registers and raising irq_ack.  The program
// loader fills the recommendation memory through ld_*.
//
// All timing is that of the sub-blocks: register accesses as in r4_regfile,
// a mode write takes effect at the next accepted register access, irq rises
// two cycles after the retirement that closes a window.
//
// From the paper: the register file plus the Sec. 5.1 mode register,
// recommendation memory and peripheral, and the handler that flips the bit.
// Own choices: the CPU stays outside, with its signals as ports.
module r4_top
  import r4_pkg::*;
#(
  parameter int unsigned R     = NUM_REGS,
  parameter int unsigned B     = REG_BITS,
  parameter int unsigned N     = NUM_TRACKS,
  parameter int unsigned W     = TRACK_POS,
  parameter int unsigned NAP   = NUM_AP,
  parameter int unsigned WIN   = WINDOW,
  parameter int unsigned DEPTH = TEXT_INSNS,
  localparam int unsigned RW   = idx_w(R),
  localparam int unsigned WAW  = idx_w((DEPTH + 31) / 32),
  localparam int unsigned OW   = $clog2(W / NAP) + 2
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // register port of the pipeline
  input  logic                 req_valid,
  output logic                 req_ready,
  input  logic                 req_we,
  input  logic [RW-1:0]        req_reg,
  input  logic [B-1:0]         req_wdata,
  output logic                 resp_valid,
  output logic [B-1:0]         resp_rdata,
  output logic [31:0]          resp_shifts,
  output alloc_mode_e          acc_mode,
  output logic signed [OW-1:0] glob_off,
  // system configuration register
  input  logic                 csr_we,
  input  logic [31:0]          csr_wdata,
  output logic [31:0]          csr_rdata,
  output alloc_mode_e          mode,
  output logic [31:0]          mode_changes,
  // instruction retirement and interrupt
  input  logic                 retire,
  input  logic [31:0]          pc,
  output logic                 irq,
  input  logic                 irq_ack,
  output alloc_mode_e          last_rec,
  output logic [31:0]          rec_checks,
  output logic [31:0]          rec_requests,
  // recommendation memory loader
  input  logic                 ld_we,
  input  logic [WAW-1:0]       ld_addr,
  input  logic [31:0]          ld_data
);

  localparam int unsigned AW = idx_w(DEPTH);

  logic          rom_rd_en, rom_rd_bit;
  logic [AW-1:0] rom_rd_addr;

  sys_cfg_reg u_cfg (
    .clk, .rst_n, .csr_we, .csr_wdata, .csr_rdata, .mode_o(mode), .mode_changes
  );

  r4_regfile #(.R(R), .B(B), .N(N), .W(W), .NAP(NAP)) u_rf (
    .clk, .rst_n, .mode_i(mode),
    .req_valid, .req_ready, .req_we, .req_reg, .req_wdata,
    .resp_valid, .resp_rdata, .resp_shifts, .acc_mode, .glob_off
  );

  rec_rom #(.DEPTH(DEPTH)) u_rom (
    .clk, .ld_we, .ld_addr, .ld_data,
    .rd_en(rom_rd_en), .rd_addr(rom_rd_addr), .rd_bit(rom_rd_bit)
  );

  rec_peripheral #(.WIN(WIN), .DEPTH(DEPTH)) u_rec (
    .clk, .rst_n, .retire, .pc, .cur_mode(mode),
    .rom_rd_en, .rom_rd_addr, .rom_rd_bit,
    .irq, .irq_ack, .last_rec, .checks(rec_checks), .requests(rec_requests)
  );

endmodule
