// shift_gen: shift generator and access sequencer of the racetrack register
// file ("ShiftGen").
//
// From the mode bit and the register number it produces one shift pulse per
// nanotrack and the strobes that move data between the access ports and the
// buffer.  It keeps the global offset at which all tracks rest between
// accesses.
//
// Horizontal allocation: register r lies along track r / RPT (RPT registers
// per track) or, for registers wider than a track, along the TPR tracks
// r*TPR .. r*TPR+TPR-1.  Only those tracks are pulsed, together.  They are
// first moved to offset -S/2, so that every access port faces the first
// position of its span of S positions, then walked one position per step, and
// finally moved back to the global offset.  At each position there are TPR
// access cycles (h_acc), one per track of the register (h_track), because each
// port reaches its buffer segment through one serial connection.  From offset
// 0 this costs 2*(S-1)*TPR track shift pulses, the shift cost model's
// (W/n_ap - 1) * 2 * max(1, B/W).
//
// Vertical allocation: register r sits at slot r / G of every port span,
// group r % G (G registers share one offset).  All tracks are pulsed together
// from the global offset to slot - S/2, one strobe (v_acc) moves the whole
// register, and the tracks stay there as the new global offset:
// |slot - old slot| * N track shift pulses, as in the cost model.
//
// Timing: start is taken in IDLE (busy low).  Every shift step or access takes
// one cycle; after the last one done is high for one cycle and the unit
// returns to IDLE.  acc_shifts then holds the track shift pulses of the
// access.  Mode and register are latched at start, so a mode change takes
// effect with the next access.  One shift step or access per cycle is this
// design's timing choice; the physical shift time sets the clock period.
//
// From the paper: per-track shift pulses, the horizontal seek / position walk /
// realign sequence, the synchronous vertical seek without realignment, and the
// global offset kept in the generator; the pulse counts equal the paper's shift
// cost formulas.  Own choices: one shift or access per clock, one clock for the
// racetrack and the buffer (the paper draws separate f_rt and f_reg), and B/W
// access cycles per position when a register spans B/W tracks.
module shift_gen
  import r4_pkg::*;
#(
  parameter int unsigned R    = NUM_REGS,
  parameter int unsigned B    = REG_BITS,
  parameter int unsigned N    = NUM_TRACKS,
  parameter int unsigned W    = TRACK_POS,
  parameter int unsigned NAP  = NUM_AP,
  localparam int unsigned S   = W / NAP,
  localparam int unsigned RPT = max1(W / B),
  localparam int unsigned TPR = max1(B / W),
  localparam int unsigned G   = NAP * N / B,
  localparam int unsigned RW  = idx_w(R),
  localparam int unsigned TW  = idx_w(N),
  localparam int unsigned GW  = idx_w(G),
  localparam int unsigned PW  = idx_w(RPT),
  localparam int unsigned KW  = idx_w(TPR),
  localparam int unsigned OW  = $clog2(S) + 2
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  start,
  input  alloc_mode_e           mode_i,
  input  logic [RW-1:0]         reg_i,
  output logic                  busy,
  output logic                  done,
  output alloc_mode_e           acc_mode,
  output logic [N-1:0]          shift_en,
  output logic                  shift_up,
  output logic                  h_acc,
  output logic [TW-1:0]         h_track,
  output logic [PW-1:0]         h_part,
  output logic                  v_acc,
  output logic [GW-1:0]         v_group,
  output logic [31:0]           acc_shifts,
  output logic signed [OW-1:0]  glob_off
);

  if (NAP < RPT) begin : g_err_h
    $error("shift_gen: horizontal allocation needs NUM_AP >= TRACK_POS/REG_BITS");
  end
  if (NAP * N < B) begin : g_err_v
    $error("shift_gen: vertical allocation needs NUM_AP*NUM_TRACKS >= REG_BITS");
  end
  if (N * W < R * B) begin : g_err_c
    $error("shift_gen: the tracks cannot hold all registers");
  end

  localparam logic signed [OW-1:0] H_BEGIN = -OW'(S / 2);
  localparam logic signed [OW-1:0] H_END   = OW'(S - 1 - S / 2);

  typedef enum logic [2:0] {
    ST_IDLE, ST_H_SEEK, ST_H_ACC, ST_H_STEP, ST_H_RET, ST_V_SEEK, ST_V_ACC, ST_DONE
  } state_e;

  state_e                 state;
  logic [RW-1:0]          reg_q;
  logic [KW-1:0]          sub;       // track of the register in this access cycle
  logic signed [OW-1:0]   toff;      // offset of the tracks walked horizontally
  logic signed [OW-1:0]   v_target;
  logic [N-1:0]           h_mask;    // tracks holding the register horizontally

  function automatic logic signed [OW-1:0] v_off(input logic [RW-1:0] r);
    return OW'(int'(r) / int'(G)) - OW'(S / 2);
  endfunction

  always_comb begin
    h_mask = '0;
    for (int k = 0; k < TPR; k++)
      h_mask[(B <= W) ? int'(reg_q) / RPT : int'(reg_q) * TPR + k] = 1'b1;
  end

  assign acc_mode = alloc_mode_e'(state inside {ST_V_SEEK, ST_V_ACC});
  assign busy     = (state != ST_IDLE);
  assign done     = (state == ST_DONE);
  assign h_acc    = (state == ST_H_ACC);
  assign v_acc    = (state == ST_V_ACC);
  assign h_track  = TW'((B <= W) ? int'(reg_q) / RPT : int'(reg_q) * TPR + int'(sub));
  assign h_part   = PW'(int'(reg_q) % RPT);
  assign v_group  = GW'(int'(reg_q) % int'(G));

  always_comb begin
    shift_en = '0;
    shift_up = 1'b0;
    unique case (state)
      ST_H_SEEK, ST_H_RET: shift_en = h_mask;
      ST_H_STEP: begin
        shift_en = h_mask;
        shift_up = 1'b1;
      end
      ST_V_SEEK: begin
        shift_en = '1;
        shift_up = (glob_off < v_target);
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= ST_IDLE;
      reg_q      <= '0;
      sub        <= '0;
      toff       <= '0;
      v_target   <= '0;
      glob_off   <= '0;
      acc_shifts <= '0;
    end else begin
      unique case (state)
        ST_IDLE: if (start) begin
          reg_q      <= reg_i;
          sub        <= '0;
          acc_shifts <= '0;
          if (mode_i == MODE_HORIZONTAL) begin
            toff  <= glob_off;
            state <= (glob_off == H_BEGIN) ? ST_H_ACC : ST_H_SEEK;
          end else begin
            v_target <= v_off(reg_i);
            state    <= (glob_off == v_off(reg_i)) ? ST_V_ACC : ST_V_SEEK;
          end
        end
        ST_H_SEEK: begin
          toff       <= toff - OW'(1);
          acc_shifts <= acc_shifts + 32'(TPR);
          if (toff - OW'(1) == H_BEGIN) state <= ST_H_ACC;
        end
        ST_H_ACC: begin
          if (int'(sub) != TPR - 1) sub <= sub + KW'(1);
          else begin
            sub <= '0;
            if (toff != H_END)          state <= ST_H_STEP;
            else if (toff != glob_off)  state <= ST_H_RET;
            else                        state <= ST_DONE;
          end
        end
        ST_H_STEP: begin
          toff       <= toff + OW'(1);
          acc_shifts <= acc_shifts + 32'(TPR);
          state      <= ST_H_ACC;
        end
        ST_H_RET: begin
          toff       <= toff - OW'(1);
          acc_shifts <= acc_shifts + 32'(TPR);
          if (toff - OW'(1) == glob_off) state <= ST_DONE;
        end
        ST_V_SEEK: begin
          glob_off   <= shift_up ? glob_off + OW'(1) : glob_off - OW'(1);
          acc_shifts <= acc_shifts + 32'(N);
          if ((shift_up ? glob_off + OW'(1) : glob_off - OW'(1)) == v_target)
            state <= ST_V_ACC;
        end
        ST_V_ACC: state <= ST_DONE;
        ST_DONE:  state <= ST_IDLE;
        default:  state <= ST_IDLE;
      endcase
    end
  end

  // Offsets stay inside the overflow regions of the tracks.
  assert property (@(posedge clk) disable iff (!rst_n)
    (toff >= H_BEGIN) && (toff <= H_END) && (glob_off >= H_BEGIN) && (glob_off <= H_END))
    else $error("shift_gen: offset outside the overflow region");

endmodule
