// tb_spiking_matmul_unit: the 16x16 array against a reference matrix
// product. Tiles of 1..4 chunk-passes with shifts 0 and 3 (extra magnitude
// pass), idle gaps between passes, and a check that acc_done arrives exactly
// two cycles after the last pass was presented and that acc then holds
// sum over passes of (S_p * W_p^T) << shift_p.
module tb_spiking_matmul_unit;
  import spk_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid, in_first, in_last, acc_done;
  logic [SH_W-1:0]         in_shift;
  logic        [T_PE:0]    spikes  [ROWS][K];
  logic signed [W_W-1:0]   weights [COLS][K];
  logic signed [ACC_W-1:0] acc     [ROWS][COLS];
  longint ref_acc [ROWS][COLS];
  int checks = 0, failures = 0, cycles = 0;
  int last_cycle, done_cycle;

  spiking_matmul_unit dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) begin
    cycles++;
    if (acc_done) done_cycle = cycles;
  end

  initial begin : watchdog
    wait (cycles == 20000);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_valid = 0; in_first = 0; in_last = 0; in_shift = '0;
    for (int r = 0; r < ROWS; r++) for (int i = 0; i < K; i++) spikes[r][i] = '0;
    for (int c = 0; c < COLS; c++) for (int i = 0; i < K; i++) weights[c][i] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int tile = 0; tile < 30; tile++) begin
      int np;
      np = 1 + $urandom_range(3);
      for (int r = 0; r < ROWS; r++) for (int c = 0; c < COLS; c++) ref_acc[r][c] = 0;
      for (int p = 0; p < np; p++) begin
        int sh;
        sh = (tile % 3 == 2 && p % 2 == 1) ? 3 : 0;
        for (int r = 0; r < ROWS; r++)
          for (int i = 0; i < K; i++)
            spikes[r][i] = (T_PE+1)'(($urandom_range(2) == 0) ? int'($urandom_range(14)) - 7 : 0);
        for (int c = 0; c < COLS; c++)
          for (int i = 0; i < K; i++)
            weights[c][i] = W_W'($urandom);
        for (int r = 0; r < ROWS; r++)
          for (int c = 0; c < COLS; c++) begin
            longint d;
            d = 0;
            for (int i = 0; i < K; i++)
              d += longint'(signed'(spikes[r][i])) * longint'(weights[c][i]);
            ref_acc[r][c] += d <<< sh;
          end
        in_valid = 1; in_first = (p == 0); in_last = (p == np - 1); in_shift = SH_W'(sh);
        @(negedge clk);
        last_cycle = cycles;
        in_valid = 0; in_first = 0; in_last = 0;
        if ($urandom_range(1) == 1) @(negedge clk);     // idle gap
      end
      while (done_cycle < last_cycle) @(negedge clk);
      checks++;
      if (done_cycle - last_cycle != 2) begin
        failures++;
        $display("FAIL tile %0d: acc_done %0d cycles after the last pass, expected 2", tile, done_cycle - last_cycle);
      end
      for (int r = 0; r < ROWS; r++)
        for (int c = 0; c < COLS; c++) begin
          checks++;
          if (longint'(acc[r][c]) != ref_acc[r][c]) begin
            failures++;
            if (failures < 20) $display("FAIL tile %0d acc[%0d][%0d]=%0d expected %0d", tile, r, c, acc[r][c], ref_acc[r][c]);
          end
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
