// rec_rom: recommendation memory, one bit per instruction of the text segment.
//
// The offline analysis produces one recommendation bit per instruction
// (1 = vertical, 0 = horizontal allocation), 1/32 of a 32-bit instruction
// text segment.  The bits are written once when the program is loaded and are
// then read only by the recommendation peripheral, so the memory has a
// loader write port of 32-bit words and a single-bit read port.
//
// Interface: ld_we writes ld_data to word ld_addr (bit i of word w is the
// recommendation of instruction 32*w+i).  rd_en/rd_addr (instruction index)
// returns the bit on rd_bit one clock later.  DEPTH is the number of
// instructions covered; its value and the port organisation are this
// design's choices.  The contents are not reset.
//
// Timing: loader writes at the clock edge; rd_bit is valid one cycle after rd_en.
// From the paper: one recommendation bit per instruction in a dedicated memory
// filled at program load and read only by the peripheral.  Own choices: the
// 32-bit loader port, the read latency and the depth.
module rec_rom
  import r4_pkg::*;
#(
  parameter int unsigned DEPTH = TEXT_INSNS,
  localparam int unsigned WORDS = (DEPTH + 31) / 32,
  localparam int unsigned WAW   = idx_w(WORDS),
  localparam int unsigned AW    = idx_w(DEPTH)
) (
  input  logic           clk,
  input  logic           ld_we,
  input  logic [WAW-1:0] ld_addr,
  input  logic [31:0]    ld_data,
  input  logic           rd_en,
  input  logic [AW-1:0]  rd_addr,
  output logic           rd_bit
);

  if (DEPTH % 32 != 0 || DEPTH < 64) begin : g_err_depth
    $error("rec_rom: DEPTH must be a multiple of 32, at least 64");
  end

  logic [31:0] mem [WORDS];
  logic [31:0] rd_word;
  logic [4:0]  rd_sel;

  always_ff @(posedge clk) begin
    if (ld_we) mem[ld_addr] <= ld_data;
    if (rd_en) begin
      rd_word <= mem[rd_addr[AW-1:5]];
      rd_sel  <= rd_addr[4:0];
    end
  end

  assign rd_bit = rd_word[rd_sel];

endmodule
