// bit_shuffle: vertical-allocation router between the access ports and one
// buffer segment.
//
// In vertical allocation the G = NUM_AP*N/B registers that share one offset
// are laid out one after another over the bits under the access ports, taken
// port by port and track by track: bit b of the register in group g is the
// bit under port (g*B + b) / N on track (g*B + b) % N.  With the default
// geometry (2 ports, 32 tracks, 64-bit registers) that puts bits 0..31 on
// port 0 and bits 32..63 on port 1; with wider track counts several registers
// share a port, with more ports several registers share an offset.
//
// Segment SEG_IDX holds register bits [SEG_IDX*SEG, (SEG_IDX+1)*SEG), so for
// each of its bits the shuffle selects one of G candidate port bits by the
// register's group.  The write direction routes the segment bits back to the
// same (port, track) places and raises their write enables when wr is high.
// Combinational.  The group-ordered layout is this design's concrete choice
// for a shuffle that "can reroute each bit to any position in the buffer
// segment".
//
// From the paper: a shuffle per access port that routes the aligned bits of all
// tracks into the buffer segment.  Own choices: the layout order above and the
// G:1 multiplexer per bit as the routing circuit.
module bit_shuffle
  import r4_pkg::*;
#(
  parameter int unsigned B       = REG_BITS,
  parameter int unsigned N       = NUM_TRACKS,
  parameter int unsigned NAP     = NUM_AP,
  parameter int unsigned SEG_IDX = 0,
  localparam int unsigned SEG    = B / NAP,
  localparam int unsigned G      = NAP * N / B,
  localparam int unsigned GW     = idx_w(G)
) (
  input  logic [NAP-1:0][N-1:0] ap_rd,
  input  logic [GW-1:0]         group,
  input  logic [SEG-1:0]        seg_q,
  input  logic                  wr,
  output logic [SEG-1:0]        seg_d,
  output logic [NAP-1:0][N-1:0] wr_en,
  output logic [NAP-1:0][N-1:0] wr_data
);

  int unsigned lin, ap, t0;

  always_comb begin
    lin     = int'(group) * B + SEG_IDX * SEG;  // first bit in port/track order
    ap      = lin / N;
    t0      = lin % N;
    seg_d   = '0;
    wr_en   = '0;
    wr_data = '0;
    for (int j = 0; j < SEG; j++) begin
      seg_d[j]            = ap_rd[ap][t0 + j];
      wr_en[ap][t0 + j]   = wr;
      wr_data[ap][t0 + j] = seg_q[j];
    end
  end

endmodule
