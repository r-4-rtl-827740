// tb_rec_peripheral: drives instruction retirements with random gaps and
// program counters, answers the memory read from a recommendation function
// computed here, and checks that a lookup happens exactly every WINDOW
// retirements, at the index of the current pc, that irq rises exactly when
// the recommendation differs from the active mode (two cycles after the
// closing retirement), and that irq_ack clears it.
//
// From the paper: the check every WIN instructions and the interrupt on a
// mismatch; the pc convention and acknowledge are this design's.
module tb_rec_peripheral;
  import r4_pkg::*;
  localparam int WIN = WINDOW, DEPTH = TEXT_INSNS;
  logic clk = 0, rst_n = 0, retire = 0, irq_ack = 0, rom_rd_en, rom_rd_bit = 0, irq;
  logic [31:0] pc = '0, checks_o, requests;
  logic [$clog2(DEPTH)-1:0] rom_rd_addr;
  alloc_mode_e cur_mode = MODE_HORIZONTAL, last_rec;
  int checks = 0, failures = 0, nret = 0, nlook = 0, nirq = 0;

  always #5 clk = ~clk;
  rec_peripheral dut (.*, .checks(checks_o));

  function automatic bit rec(int idx); return ((idx / 7) % 3) == 0; endfunction

  // memory model: one cycle read latency
  always @(posedge clk) if (rom_rd_en) rom_rd_bit <= rec(int'(rom_rd_addr));

  initial begin
    #5000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit c, input string what);
    checks++;
    if (!c) begin failures++; $display("FAIL %s at retirement %0d", what, nret); end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 5000; it++) begin
      @(negedge clk);
      irq_ack = 0;
      retire = ($urandom_range(3) != 0);
      pc = 32'($urandom_range(DEPTH - 1)) << 2;
      if ($urandom_range(50) == 0) pc = 32'(DEPTH * 4 + 8);   // outside the text
      if (retire) begin
        nret++;
        #1 chk(rom_rd_en == ((nret % WIN == 0) && pc < DEPTH * 4), "lookup timing");
        if (rom_rd_en) begin
          automatic bit differs;
          chk(int'(rom_rd_addr) == int'(pc >> 2), "lookup index");
          nlook++;
          differs = (rec(int'(pc >> 2)) != cur_mode);
          @(negedge clk); retire = 0;
          chk(!irq, "irq not before compare");
          @(negedge clk);
          chk(irq == differs, "irq on mismatch");
          chk(last_rec == alloc_mode_e'(rec(int'(pc >> 2))), "last recommendation");
          if (irq) begin
            nirq++;
            // the handler flips the mode and acknowledges
            cur_mode = alloc_mode_e'(~cur_mode);
            irq_ack = 1;
            @(negedge clk); irq_ack = 0;
            chk(!irq, "irq cleared by ack");
          end
        end
      end else begin
        #1 chk(!rom_rd_en, "no lookup without retirement");
      end
    end
    chk(checks_o == 32'(nlook), "check counter");
    chk(requests == 32'(nirq), "request counter");
    chk(nirq > 0 && nlook > nirq, "both outcomes seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
