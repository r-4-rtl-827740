// buffer_segment: one segment of the buffer register between the pipeline and
// the access ports.
//
// The REG_BITS-bit buffer register is split into NUM_AP equal segments, one per
// access port.  A segment can be loaded in parallel (from the pipeline's write
// data or from the bit shuffle) and rolled by one bit in either direction
// through its serial port:
//   roll right: ser_out = q[0],      q <= {in, q[SEG-1:1]}
//   roll left:  ser_out = q[SEG-1],  q <= {q[SEG-2:0], in}
// where in is ser_in when ser_take is high and the bit rolled out otherwise.
// A horizontal read therefore rolls right SEG times taking the port bits, a
// horizontal write rolls right SEG times giving its bits away and ends with
// its contents unchanged.
//
// Timing: one operation per clock; load has priority over a roll.  q is the
// registered contents.  Reset clears the segment (a choice of this design).
//
// When a port span is longer than a segment (W/n_ap > B/n_ap), the register file
// chains several segments serially; ser_take then selects the neighbouring
// segment's output.  From the paper: B/n_ap-bit segments, parallel access from
// the shuffle, a bidirectional serial roll.  Own choices: the bit order of the
// rolls, the chaining and the reset.
module buffer_segment
  import r4_pkg::*;
#(
  parameter int unsigned SEG = REG_BITS / NUM_AP
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           load,
  input  logic [SEG-1:0] d,
  input  logic           roll,
  input  logic           roll_left,
  input  logic           ser_take,
  input  logic           ser_in,
  output logic           ser_out,
  output logic [SEG-1:0] q
);

  logic        in_bit;
  logic [SEG:0] tmp_r, tmp_l;

  assign ser_out = roll_left ? q[SEG-1] : q[0];
  assign in_bit  = ser_take ? ser_in : ser_out;
  assign tmp_r   = {in_bit, q};
  assign tmp_l   = {q, in_bit};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)       q <= '0;
    else if (load)    q <= d;
    else if (roll)    q <= roll_left ? tmp_l[SEG-1:0] : tmp_r[SEG:1];
  end

endmodule
