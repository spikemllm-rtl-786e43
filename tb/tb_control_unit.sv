// tb_control_unit: tile sequencing for both modalities and several timestep
// settings (T = 2, 3, 4, 7 -> 1, 1, 2, 3 passes per chunk). The array is
// modelled by delaying mm_last by two cycles into acc_done. Checked: the
// issued bank addresses pass by pass, the array controls one cycle later
// (first, last, shift = 3 x pass), one write-back with the command's output
// address, busy/cmd_ready, and the latency n_chunks*passes + 4 from command
// to done.
module tb_control_unit;
  import spk_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  logic cmd_valid, cmd_ready, busy, done;
  tile_cmd_t cmd;
  logic [TS_W-1:0] cfg_t_vis, cfg_t_txt;
  logic rd_en, mm_valid, mm_first, mm_last, acc_done, wb_en;
  logic [IN_BW-1:0] act_base, wgt_base;
  logic [IN_AW-1:0] act_addr, wgt_addr;
  logic [SH_W-1:0] mm_shift;
  logic [OUT_BW-1:0] out_base;
  logic [OUT_AW-1:0] out_addr;
  logic last_d;
  int checks = 0, failures = 0, cycles = 0;

  control_unit dut (.*);

  // array model: acc_done two cycles after the last pass is presented
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin last_d <= 0; acc_done <= 0; end
    else begin last_d <= mm_valid && mm_last; acc_done <= last_d; end

  always #5 clk = ~clk;
  always @(posedge clk) cycles++;

  initial begin : watchdog
    wait (cycles == 50000);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input longint got, input longint exp, input string what);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s got %0d expected %0d", what, got, exp);
    end
  endtask

  task automatic run_tile(input modality_e mod, input int tv, input int tt, input int nch);
    int np, n_issue, n_wb, t0, idx;
    int exp_act [$], exp_wgt [$], exp_shift [$];
    tile_cmd_t c;
    bit prev_rd;
    int prev_idx;
    np = (((mod == MOD_TEXT) ? tt : tv) + 2) / 3;
    cfg_t_vis = TS_W'(tv); cfg_t_txt = TS_W'(tt);
    c.modality = mod;
    c.act_base = IN_BW'($urandom); c.wgt_base = c.act_base + IN_BW'(16);
    c.act_addr = IN_AW'($urandom_range(1000)); c.wgt_addr = IN_AW'($urandom_range(1000) + 2000);
    c.plane_stride = IN_AW'(100 + $urandom_range(50));
    c.n_chunks = IN_AW'(nch);
    c.out_base = OUT_BW'($urandom); c.out_addr = OUT_AW'($urandom_range(OUT_DEPTH-1));
    for (int k = 0; k < nch; k++)
      for (int p = 0; p < np; p++) begin
        exp_act.push_back(int'(c.act_addr) + k + p * int'(c.plane_stride));
        exp_wgt.push_back(int'(c.wgt_addr) + k);
        exp_shift.push_back(3 * p);
      end
    check(cmd_ready, 1, "ready when idle");
    cmd = c; cmd_valid = 1;
    @(negedge clk);
    t0 = cycles - 1;              // counter value in the cycle the command was taken
    cmd_valid = 0; cmd = '0;
    n_issue = 0; n_wb = 0; prev_rd = 0; prev_idx = 0;
    while (!done) begin
      check(busy, 1, "busy");
      check(cmd_ready, 0, "not ready while busy");
      // array controls refer to the previous cycle's issue
      check(mm_valid, prev_rd, "mm_valid");
      if (prev_rd) begin
        check(mm_first, prev_idx == 0, "mm_first");
        check(mm_last, prev_idx == exp_act.size() - 1, "mm_last");
        check(mm_shift, exp_shift[prev_idx], "mm_shift");
      end
      if (rd_en) begin
        idx = n_issue;
        check(act_addr, exp_act[idx], "act_addr");
        check(wgt_addr, exp_wgt[idx], "wgt_addr");
        check(act_base, c.act_base, "act_base");
        check(wgt_base, c.wgt_base, "wgt_base");
        n_issue++;
        prev_idx = idx;
      end
      prev_rd = rd_en;
      if (wb_en) begin
        n_wb++;
        check(out_base, c.out_base, "out_base");
        check(out_addr, c.out_addr, "out_addr");
      end
      @(negedge clk);
      if (cycles - t0 > 10000) break;
    end
    check(n_issue, nch * np, "issued chunk-passes");
    check(n_wb, 1, "write-backs");
    check(cycles - t0, nch * np + 4, "latency command to done");
    @(negedge clk);
    check(done, 0, "done is a pulse");
    check(busy, 0, "idle after done");
  endtask

  initial begin
    cmd_valid = 0; cmd = '0; cfg_t_vis = 3'd3; cfg_t_txt = 3'd4;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    check(busy, 0, "idle after reset");
    run_tile(MOD_VISUAL, 3, 4, 1);
    run_tile(MOD_TEXT,   3, 4, 1);
    run_tile(MOD_VISUAL, 3, 4, 7);
    run_tile(MOD_TEXT,   3, 4, 9);
    run_tile(MOD_VISUAL, 2, 3, 5);
    run_tile(MOD_TEXT,   2, 3, 5);
    run_tile(MOD_TEXT,   3, 7, 4);
    for (int n = 0; n < 10; n++)
      run_tile(modality_e'($urandom_range(1)), 1 + $urandom_range(5), 1 + $urandom_range(6), 1 + $urandom_range(20));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
