// tb_bit_shuffle: checks the vertical routing of two bit shuffles, one at the
// default size (segment 1 of 2) and one with 8 access ports (segment 3 of 8,
// four register groups).  Expected routes are computed here from the
// vertical layout: register bit b lies on track b % N at access port
// group*(B/N) + b/N.
//
// Timing: combinational; each check is made 1 time unit after the inputs change.
// The paper gives only the function of the shuffle; the expected positions come
// from this design's layout rule.
module tb_bit_shuffle;
  import r4_pkg::*;
  localparam int B = REG_BITS, N = NUM_TRACKS;

  int checks = 0, failures = 0;

  // default: 2 ports
  localparam int NA = 2, SA = B / NA, IA = 1;
  logic [NA-1:0][N-1:0] ap_a, wen_a, wdat_a;
  logic [0:0] grp_a;
  logic [SA-1:0] q_a, d_a;
  logic wr_a;
  bit_shuffle #(.NAP(NA), .SEG_IDX(IA)) dut_a (
    .ap_rd(ap_a), .group(grp_a), .seg_q(q_a), .wr(wr_a),
    .seg_d(d_a), .wr_en(wen_a), .wr_data(wdat_a));

  // 8 ports
  localparam int NB = 8, SB = B / NB, IB = 3;
  logic [NB-1:0][N-1:0] ap_b, wen_b, wdat_b;
  logic [1:0] grp_b;
  logic [SB-1:0] q_b, d_b;
  logic wr_b;
  bit_shuffle #(.NAP(NB), .SEG_IDX(IB)) dut_b (
    .ap_rd(ap_b), .group(grp_b), .seg_q(q_b), .wr(wr_b),
    .seg_d(d_b), .wr_en(wen_b), .wr_data(wdat_b));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int it = 0; it < 200; it++) begin
      for (int a = 0; a < NA; a++) ap_a[a] = $urandom;
      for (int a = 0; a < NB; a++) ap_b[a] = $urandom;
      grp_a = '0;
      grp_b = 2'($urandom_range(3));
      q_a = $urandom; q_b = 8'($urandom);
      wr_a = 1'($urandom_range(1)); wr_b = 1'($urandom_range(1));
      #1;
      for (int j = 0; j < SA; j++) begin
        automatic int b = IA * SA + j;
        automatic int ap = (b / N), t = b % N;
        checks++;
        if (d_a[j] !== ap_a[ap][t]) failures++;
        checks++;
        if (wen_a[ap][t] !== wr_a || (wr_a && wdat_a[ap][t] !== q_a[j])) failures++;
      end
      for (int j = 0; j < SB; j++) begin
        automatic int b = IB * SB + j;
        automatic int ap = int'(grp_b) * (B / N) + b / N, t = b % N;
        checks++;
        if (d_b[j] !== ap_b[ap][t]) begin
          failures++;
          $display("8-port read bit %0d group %0d wrong", j, grp_b);
        end
        checks++;
        if (wen_b[ap][t] !== wr_b || (wr_b && wdat_b[ap][t] !== q_b[j])) failures++;
      end
      // no other write enables
      checks++;
      if ($countones(wen_a) != (wr_a ? SA : 0) || $countones(wen_b) != (wr_b ? SB : 0)) begin
        failures++;
        $display("stray write enables");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
