// r4_regfile: racetrack register file with a runtime-selectable allocation.
//
// NUM_REGS registers of REG_BITS (B) bits live in NUM_TRACKS (N) skyrmion
// nanotracks of TRACK_POS (W) positions with NUM_AP access ports each; port a
// serves the span of S = W/NUM_AP positions around (a + 0.5)*S.  The mode
// input chooses, per access, how register contents map onto the tracks:
//
//   horizontal: a register lies along a track (RPT = W/B registers per track,
//     or TPR = B/W tracks per register).  Only its track(s) are shifted: to
//     the start of the port spans, position by position across them, and back
//     to the resting offset.  Every port streams its span bit-serially through
//     its selection multiplexer into the buffer, which rolls one bit per
//     access cycle.  The cost is the same for every register.
//   vertical: a register lies across the tracks at one slot of the port spans.
//     All tracks are shifted together to that slot and the whole register
//     moves in one cycle through the bit shuffles.  The tracks stay at the
//     slot, so repeated or nearby accesses need few or no shifts.
//
// Both modes leave all tracks at one common offset after each access, so the
// mode may change between any two accesses with no work in the hardware.  The
// contents are then read with another mapping, so software saves the
// registers before a change and restores them after it.
//
// The buffer register (B bits) is made of NUM_AP segments of SEG = B/NUM_AP
// bits, one per port.  When a port's span holds more bits of a register than
// a segment (W > B), RPT segments are chained into one serial chain per port
// in use; that chaining is this implementation's way of keeping the segment
// size at B/NUM_AP as the architecture requires.
//
// Pipeline-side interface (valid/ready): a request (req_valid, req_we,
// req_reg, req_wdata) is taken when req_ready is high; write data is loaded
// into the buffer in the accepting cycle.  When the access is complete
// resp_valid is high for one cycle with resp_rdata (the register for a read,
// the written value for a write) and resp_shifts, the number of track shift
// pulses the access used.  Accesses are in order and one at a time.  The mode
// is sampled when a request is accepted.
//
// Latency, in clock edges from the accepting edge to the one that raises
// resp_valid: horizontal h + S*TPR, where h is the number of shift steps of
// the walk (2*(S-1) from resting offset 0); vertical |slot - old slot| + 1.
// The cycle-level timing, the handshake and a single clock for tracks and
// buffer (f_rt and f_reg may differ in the architecture) are choices of this
// implementation.
//
// From the paper: the structure (tracks, access ports, shift generator, bit
// shuffles, multiplexers, buffer segments) and both allocation schemes with
// their shift costs.  Own choices: the valid/ready request interface, mode
// sampling when a request is accepted, segment chaining when W > B, and the
// vertical bit order (see bit_shuffle).
module r4_regfile
  import r4_pkg::*;
#(
  parameter int unsigned R   = NUM_REGS,
  parameter int unsigned B   = REG_BITS,
  parameter int unsigned N   = NUM_TRACKS,
  parameter int unsigned W   = TRACK_POS,
  parameter int unsigned NAP = NUM_AP,
  localparam int unsigned S   = W / NAP,
  localparam int unsigned SEG = B / NAP,
  localparam int unsigned RPT = max1(W / B),
  localparam int unsigned APH = NAP / RPT,
  localparam int unsigned G   = NAP * N / B,
  localparam int unsigned RW  = idx_w(R),
  localparam int unsigned TW  = idx_w(N),
  localparam int unsigned GW  = idx_w(G),
  localparam int unsigned PW  = idx_w(RPT),
  localparam int unsigned OW  = $clog2(S) + 2
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  alloc_mode_e          mode_i,
  input  logic                 req_valid,
  output logic                 req_ready,
  input  logic                 req_we,
  input  logic [RW-1:0]        req_reg,
  input  logic [B-1:0]         req_wdata,
  output logic                 resp_valid,
  output logic [B-1:0]         resp_rdata,
  output logic [31:0]          resp_shifts,
  output alloc_mode_e          acc_mode,
  output logic signed [OW-1:0] glob_off
);

  logic                  busy, done, h_acc, v_acc, shift_up, start;
  logic [N-1:0]          shift_en;
  logic [TW-1:0]         h_track;
  logic [PW-1:0]         h_part;
  logic [GW-1:0]         v_group;
  logic [NAP-1:0][N-1:0] ap_rd, trk_wr_en, trk_wr_data;
  logic signed [N-1:0][OW-1:0] trk_off;
  logic                  we_q;

  assign req_ready = !busy;
  assign start     = req_valid && req_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     we_q <= 1'b0;
    else if (start) we_q <= req_we;
  end

  shift_gen #(.R(R), .B(B), .N(N), .W(W), .NAP(NAP)) u_shift_gen (
    .clk, .rst_n, .start, .mode_i, .reg_i(req_reg),
    .busy, .done, .acc_mode, .shift_en, .shift_up,
    .h_acc, .h_track, .h_part, .v_acc, .v_group,
    .acc_shifts(resp_shifts), .glob_off
  );

  nanotrack_array #(.N(N), .W(W), .NAP(NAP)) u_tracks (
    .clk, .rst_n, .shift_en, .shift_up, .ap_rd,
    .wr_en(trk_wr_en), .wr_data(trk_wr_data), .offset(trk_off)
  );

  // Per access port: serial multiplexer, bit shuffle and buffer segment.
  // In horizontal allocation the segments form APH serial chains of RPT
  // segments each.  Chain m is fed by port h_part*APH + m: its top segment
  // takes the port bit (read) or the bit leaving the chain's bottom segment
  // (write), every other segment takes the bit leaving the segment above.
  logic [NAP-1:0][SEG-1:0]        seg_q, seg_shuf_d;
  logic [NAP-1:0]                 ser_rd, ser_wr, seg_out, seg_in, seg_take;
  logic [NAP-1:0][N-1:0]          mux_wr_en, mux_wr_data;
  logic [NAP-1:0][NAP-1:0][N-1:0] shuf_wr_en, shuf_wr_data;

  for (genvar a = 0; a < NAP; a++) begin : g_port
    localparam int unsigned CHAIN  = a / RPT;                    // chain of segment a
    localparam bit          TOP    = (a % RPT) == RPT - 1;       // chain input segment
    localparam int unsigned BOTTOM = (a % APH) * RPT;            // chain output for port a

    serial_mux #(.N(N)) u_mux (
      .ap_rd(ap_rd[a]), .sel(h_track), .ser_rd(ser_rd[a]), .ser_wr(ser_wr[a]),
      .wr(h_acc && we_q && (int'(h_part) == a / APH)),
      .wr_en(mux_wr_en[a]), .wr_data(mux_wr_data[a])
    );
    assign ser_wr[a] = seg_out[BOTTOM];

    if (TOP) begin : g_top
      assign seg_in[a]   = we_q ? seg_out[CHAIN * RPT] : ser_rd[int'(h_part) * APH + CHAIN];
      assign seg_take[a] = !(we_q && RPT == 1);
    end else begin : g_inner
      assign seg_in[a]   = seg_out[a + 1];
      assign seg_take[a] = 1'b1;
    end

    bit_shuffle #(.B(B), .N(N), .NAP(NAP), .SEG_IDX(a)) u_shuffle (
      .ap_rd, .group(v_group), .seg_q(seg_q[a]), .wr(v_acc && we_q),
      .seg_d(seg_shuf_d[a]), .wr_en(shuf_wr_en[a]), .wr_data(shuf_wr_data[a])
    );

    buffer_segment #(.SEG(SEG)) u_seg (
      .clk, .rst_n,
      .load     ((start && req_we) || (v_acc && !we_q)),
      .d        (start ? req_wdata[a*SEG +: SEG] : seg_shuf_d[a]),
      .roll     (h_acc),
      .roll_left(1'b0),
      .ser_take (seg_take[a]),
      .ser_in   (seg_in[a]),
      .ser_out  (seg_out[a]),
      .q        (seg_q[a])
    );
  end

  // Merge the write enables of the horizontal and vertical paths.
  always_comb begin
    trk_wr_en   = mux_wr_en;
    trk_wr_data = mux_wr_en & mux_wr_data;
    for (int s = 0; s < NAP; s++) begin
      trk_wr_en   |= shuf_wr_en[s];
      trk_wr_data |= shuf_wr_en[s] & shuf_wr_data[s];
    end
  end

  assign resp_valid = done;
  assign resp_rdata = seg_q;

  // Horizontal and vertical transfers never overlap.
  assert property (@(posedge clk) disable iff (!rst_n) !(h_acc && v_acc));

  // Between accesses every track rests at the common offset, which is what
  // lets the mode change with no work in the hardware.
  logic aligned;
  always_comb begin
    aligned = 1'b1;
    for (int t = 0; t < N; t++)
      if (trk_off[t] != glob_off) aligned = 1'b0;
  end
  assert property (@(posedge clk) disable iff (!rst_n) !busy |-> aligned)
    else $error("r4_regfile: tracks not at the common offset between accesses");

endmodule
