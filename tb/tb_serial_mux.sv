// tb_serial_mux: checks the horizontal selection multiplexer/demultiplexer
// over all track selections: the selected track bit reaches the serial
// output, and a write enables only the selected track with the serial bit.
//
// Timing: combinational; checked 1 time unit after the inputs change.
// The function is the paper's; the single-track write enable is this design's.
module tb_serial_mux;
  import r4_pkg::*;
  localparam int N = NUM_TRACKS;
  logic [N-1:0] ap_rd, wr_en, wr_data;
  logic [$clog2(N)-1:0] sel;
  logic ser_rd, ser_wr, wr;
  int checks = 0, failures = 0;

  serial_mux dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int it = 0; it < 500; it++) begin
      ap_rd = $urandom;
      sel = $clog2(N)'(it % N);
      ser_wr = 1'($urandom_range(1));
      wr = 1'($urandom_range(1));
      #1;
      checks++;
      if (ser_rd !== ap_rd[it % N]) failures++;
      checks++;
      if (wr_en !== (wr ? (N'(1) << (it % N)) : '0)) failures++;
      checks++;
      if (wr && wr_data[it % N] !== ser_wr) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
