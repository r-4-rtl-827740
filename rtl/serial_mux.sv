// serial_mux: horizontal-allocation selection multiplexer/demultiplexer of one
// access port.
//
// In horizontal allocation a register lies along one nanotrack, so of the N
// bits under an access port only the one of the selected track is used.  The
// multiplexer passes that bit to the serial input of the port's buffer
// segment (ser_rd); the demultiplexer routes the segment's serial output
// (ser_wr) back to the same track and raises only that track's write enable
// when wr is high.  Combinational.
//
// From the paper: one selection multiplexer/demultiplexer per access port
// connected to the serial port of the buffer.  Own choice: the demultiplexer
// raises only the selected track's write enable.
module serial_mux
  import r4_pkg::*;
#(
  parameter int unsigned N  = NUM_TRACKS,
  localparam int unsigned TW = idx_w(N)
) (
  input  logic [N-1:0]  ap_rd,
  input  logic [TW-1:0] sel,
  output logic          ser_rd,
  input  logic          ser_wr,
  input  logic          wr,
  output logic [N-1:0]  wr_en,
  output logic [N-1:0]  wr_data
);

  always_comb begin
    ser_rd       = ap_rd[sel];
    wr_en        = '0;
    wr_en[sel]   = wr;
    wr_data      = '0;
    wr_data[sel] = ser_wr;
  end

endmodule
