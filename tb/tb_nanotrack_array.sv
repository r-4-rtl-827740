// tb_nanotrack_array: checks the nanotrack model against a reference array.
// Random writes at the access ports, random per-track shifts within the
// overflow range, and comparison of every access-port bit and track offset
// with a model kept in the testbench (physical positions, fixed port places).
//
// Timing: inputs change at the negative edge; the model is compared after each
// positive edge.  Port places and overflow size follow the paper.
module tb_nanotrack_array;
  import r4_pkg::*;
  localparam int N = NUM_TRACKS, W = TRACK_POS, NAP = NUM_AP;
  localparam int S = W / NAP, OV = S / 2, L = W + 2 * OV, OW = $clog2(S) + 2;

  logic clk = 0, rst_n = 0;
  logic [N-1:0] shift_en = '0;
  logic shift_up = 0;
  logic [NAP-1:0][N-1:0] ap_rd, wr_en = '0, wr_data = '0;
  logic signed [N-1:0][OW-1:0] offset;
  int checks = 0, failures = 0;

  bit model [N][L];
  int moff [N];

  always #5 clk = ~clk;
  nanotrack_array dut (.*);

  initial begin
    #5000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic compare();
    for (int t = 0; t < N; t++) begin
      for (int a = 0; a < NAP; a++) begin
        checks++;
        if (ap_rd[a][t] !== model[t][OV + a * S + S / 2]) begin
          failures++;
          if (failures < 10) $display("track %0d port %0d mismatch", t, a);
        end
      end
      checks++;
      if (int'(signed'(offset[t])) != moff[t]) failures++;
    end
  endtask

  initial begin
    foreach (model[t, p]) model[t][p] = 0;
    foreach (moff[t]) moff[t] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 3000; it++) begin
      @(negedge clk);
      shift_en = '0; wr_en = '0;
      if ($urandom_range(1)) begin
        // write a random subset of (port, track)
        for (int a = 0; a < NAP; a++) begin
          wr_en[a]   = {$urandom, $urandom};
          wr_data[a] = {$urandom, $urandom};
        end
        @(posedge clk);
        for (int t = 0; t < N; t++)
          for (int a = 0; a < NAP; a++)
            if (wr_en[a][t]) model[t][OV + a * S + S / 2] = wr_data[a][t];
      end else begin
        // shift some tracks, staying inside [-S/2, S/2-1]
        shift_up = $urandom_range(1);
        for (int t = 0; t < N; t++)
          shift_en[t] = $urandom_range(1) &&
                        (shift_up ? moff[t] < S / 2 - 1 : moff[t] > -(S / 2));
        @(posedge clk);
        for (int t = 0; t < N; t++)
          if (shift_en[t]) begin
            if (shift_up) begin
              for (int p = 0; p < L - 1; p++) model[t][p] = model[t][p + 1];
              model[t][L - 1] = 0;
              moff[t]++;
            end else begin
              for (int p = L - 1; p > 0; p--) model[t][p] = model[t][p - 1];
              model[t][0] = 0;
              moff[t]--;
            end
          end
      end
      #1 compare();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
