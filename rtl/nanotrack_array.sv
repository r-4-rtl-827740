// nanotrack_array: behavioural model of the skyrmion racetrack storage.
//
// This is a behavioural model of a magnetic device, written in synthesizable
// style so that the whole register file can be simulated and synthesized as
// a functional stand-in; it does not describe a CMOS implementation.
//
// NUM_TRACKS nanotracks each hold TRACK_POS usable positions plus OVERFLOW =
// TRACK_POS/(2*NUM_AP) spare positions at each end, because a track may be
// displaced by up to that many positions while its access ports walk over
// their share of the track.  NUM_AP access ports sit at the same place on every
// track, at usable position (TRACK_POS/NUM_AP)*(i+0.5) when the track is at
// offset 0.  A stored 1 is a skyrmion, a 0 its absence.
//
// Interface (all synchronous to clk):
//   shift_en[t]    move track t by one position this cycle (one shift pulse)
//   shift_up       direction of all pulses this cycle: 1 moves the content so
//                  that every access port faces the next higher usable
//                  position (offset +1), 0 the opposite (offset -1)
//   ap_rd[a][t]    bit of track t under access port a (detect), combinational
//   wr_en/wr_data  write the bit under access port a of track t (remove and
//                  insert a skyrmion); not allowed together with a shift of
//                  the same track
//   offset[t]      current displacement of track t, for observation
// Content shifted past a track end would be lost; an assertion flags it.
// Reset clears all tracks (no skyrmions) and all offsets, which is this
// model's choice: the real memory is non-volatile.
//
// From the paper: port places W/n_ap*(i+0.5), the W/(2*n_ap) overflow
// positions at each end, one bit per position, individually shiftable tracks
// and access ports that cross all tracks.  Own choices: the shift-register
// model itself, writes as a direct bit set (the skyrmion permutation write and
// per-port local shift pulses change only energy and time), reset clearing the
// tracks, and the assertion forbidding a write to a shifting track.
module nanotrack_array
  import r4_pkg::*;
#(
  parameter int unsigned N   = NUM_TRACKS,
  parameter int unsigned W   = TRACK_POS,
  parameter int unsigned NAP = NUM_AP,
  localparam int unsigned S  = W / NAP,
  localparam int unsigned OV = S / 2,
  localparam int unsigned L  = W + 2 * OV,
  localparam int unsigned OW = $clog2(S) + 2
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic [N-1:0]                 shift_en,
  input  logic                         shift_up,
  output logic [NAP-1:0][N-1:0]        ap_rd,
  input  logic [NAP-1:0][N-1:0]        wr_en,
  input  logic [NAP-1:0][N-1:0]        wr_data,
  output logic signed [N-1:0][OW-1:0]  offset
);

  // Physical index of access port a.
  function automatic int unsigned ap_idx(input int unsigned a);
    return OV + a * S + S / 2;
  endfunction

  logic [N-1:0][L-1:0] trk;

  always_comb begin
    for (int a = 0; a < NAP; a++)
      for (int t = 0; t < N; t++)
        ap_rd[a][t] = trk[t][ap_idx(a)];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      trk    <= '0;
      offset <= '0;
    end else begin
      for (int t = 0; t < N; t++) begin
        if (shift_en[t]) begin
          if (shift_up) begin
            trk[t]    <= {1'b0, trk[t][L-1:1]};
            offset[t] <= offset[t] + OW'(1);
          end else begin
            trk[t]    <= {trk[t][L-2:0], 1'b0};
            offset[t] <= offset[t] - OW'(1);
          end
        end else begin
          for (int a = 0; a < NAP; a++)
            if (wr_en[a][t]) trk[t][ap_idx(a)] <= wr_data[a][t];
        end
      end
    end
  end

  // A shift must never push a skyrmion off either end of a track, and writes
  // must not coincide with a shift of the same track.
  for (genvar t = 0; t < N; t++) begin : g_chk
    assert property (@(posedge clk) disable iff (!rst_n)
      shift_en[t] |-> !(shift_up ? trk[t][0] : trk[t][L-1]))
      else $error("nanotrack %0d: content shifted past the track end", t);
    for (genvar a = 0; a < NAP; a++) begin : g_ap
      assert property (@(posedge clk) disable iff (!rst_n)
        !(shift_en[t] && wr_en[a][t]))
        else $error("nanotrack %0d: write during shift", t);
    end
  end

endmodule
