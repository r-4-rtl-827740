// tb_rec_rom: fills the recommendation memory through the loader port with
// a pattern computed here (bit i = parity of i*2654435761 >> 7), then reads
// every instruction's bit, in a scrambled order (stride 37), and checks it
// one cycle after the request.
// Interface and timing: drives rec_rom at its default depth (TEXT_INSNS);
// one loader word per cycle, one read per cycle, result checked at the next
// negative edge. A watchdog ends the run after 10 ms of simulated time.
// The paper only says the bits are loaded at program load and read by the
// peripheral; the access pattern and hash are this bench's own choices.
module tb_rec_rom;
  import r4_pkg::*;
  localparam int DEPTH = TEXT_INSNS, WORDS = DEPTH / 32;
  logic clk = 0, ld_we = 0, rd_en = 0, rd_bit;
  logic [$clog2(WORDS)-1:0] ld_addr = '0;
  logic [31:0] ld_data = '0;
  logic [$clog2(DEPTH)-1:0] rd_addr = '0;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  rec_rom dut (.*);

  function automatic bit pattern(int i);
    logic [31:0] h = 32'(i) * 32'd2654435761;
    return ^h[31:7];
  endfunction

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int w = 0; w < WORDS; w++) begin
      @(negedge clk);
      ld_we = 1; ld_addr = w[$clog2(WORDS)-1:0];
      for (int i = 0; i < 32; i++) ld_data[i] = pattern(32 * w + i);
    end
    @(negedge clk) ld_we = 0;
    for (int k = 0; k < DEPTH; k++) begin
      automatic int i = (k * 37) % DEPTH;
      rd_en = 1; rd_addr = i[$clog2(DEPTH)-1:0];
      @(negedge clk);
      rd_en = 0;
      checks++;
      if (rd_bit !== pattern(i)) begin
        failures++;
        if (failures < 5) $display("bit %0d wrong", i);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
