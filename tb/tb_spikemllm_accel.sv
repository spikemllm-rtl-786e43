// tb_spikemllm_accel: end-to-end test of the accelerator at its full size
// (16x16 PEs, K=32, 44 MiB of banks). For each tile the host loads spike
// planes and weights through the host port, issues the tile command, waits
// for done, reads the 16 result rows back and compares every sum with a
// reference matrix product computed here from the same integers.
// Tiles cover: visual tokens at T_v=3 (one pass), text tokens at T_t=4 (two
// magnitude planes, the second weighted by 8), a timestep switch to
// T_v/T_t = 2/3, sparse and all-zero spike rows (bypassed weights), negative
// spikes, rotated bank bases and output banks, a host request refused while
// busy, and one reduction over 3584 inputs (112 chunks), the hidden size of a
// 7B-class language model. The tile latency n_chunks*passes + 4 is checked,
// and each of these mechanisms must have happened at least once.
module tb_spikemllm_accel;
  import spk_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  logic cmd_valid, cmd_ready, busy, done;
  tile_cmd_t cmd;
  logic [TS_W-1:0] cfg_t_vis, cfg_t_txt;
  logic host_in_we, host_in_ready, host_out_re, host_out_ready, host_out_rvalid;
  logic [IN_BW-1:0]  host_in_bank;
  logic [IN_AW-1:0]  host_in_addr;
  logic [WORD_W-1:0] host_in_wdata;
  logic [OUT_BW-1:0] host_out_bank;
  logic [OUT_AW-1:0] host_out_addr;
  logic [ROW_W-1:0]  host_out_rdata;

  localparam int MAXCH = 112;
  int act [ROWS][MAXCH*K];          // integer activations of the tile
  int wgt [COLS][MAXCH*K];          // weights of the tile
  int checks = 0, failures = 0, cycles = 0;
  int n_single_pass = 0, n_multi_pass = 0, n_zero_rows = 0, n_neg_spikes = 0;
  int n_refused = 0, n_rotated = 0, n_t_switch = 0, n_long = 0;

  spikemllm_accel dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycles++;

  initial begin : watchdog
    wait (cycles == 400000);
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

  task automatic host_write(input int bank, input int addr, input logic [WORD_W-1:0] data);
    host_in_we = 1; host_in_bank = IN_BW'(bank); host_in_addr = IN_AW'(addr); host_in_wdata = data;
    @(negedge clk);
    host_in_we = 0;
  endtask

  // tmax: largest magnitude the modality's timesteps allow; zero_row: row 3 all zero
  task automatic run_tile(input modality_e mod, input int tv, input int tt, input int nch,
                          input int abase, input int obase, input bit zero_row, input int density);
    int tm, np, tmax, stride, aaddr, waddr, oaddr, t0, nlat;
    tile_cmd_t c;
    tm = (mod == MOD_TEXT) ? tt : tv;
    np = (tm + 2) / 3;
    tmax = (1 << tm) - 1;
    stride = nch;
    aaddr = $urandom_range(1000);
    waddr = 4000 + $urandom_range(1000);
    oaddr = $urandom_range(OUT_DEPTH - 1);
    if (tv != 3 || tt != 4) n_t_switch++;
    if (abase != 0) n_rotated++;
    // operands
    for (int r = 0; r < ROWS; r++)
      for (int i = 0; i < nch*K; i++) begin
        act[r][i] = ($urandom_range(99) < density) ? int'($urandom_range(2*tmax)) - tmax : 0;
        if (zero_row && r == 3) act[r][i] = 0;
        if (act[r][i] < 0) n_neg_spikes++;
      end
    for (int cc = 0; cc < COLS; cc++)
      for (int i = 0; i < nch*K; i++)
        wgt[cc][i] = int'($urandom_range(15)) - 8;
    if (zero_row) n_zero_rows++;
    // load: magnitude plane p holds sign * (|a| >> 3p & 7)
    for (int r = 0; r < ROWS; r++)
      for (int k = 0; k < nch; k++)
        for (int p = 0; p < np; p++) begin
          logic [WORD_W-1:0] wd;
          for (int i = 0; i < K; i++) begin
            int a, m, v;
            a = act[r][k*K + i];
            m = ((a < 0 ? -a : a) >> (3*p)) & 7;
            v = (a < 0) ? -m : m;
            wd[S_W*i +: S_W] = S_W'(v);
          end
          host_write((abase + r) % NB_IN, aaddr + k + p*stride, wd);
        end
    for (int cc = 0; cc < COLS; cc++)
      for (int k = 0; k < nch; k++) begin
        logic [WORD_W-1:0] wd;
        for (int i = 0; i < K; i++) wd[W_W*i +: W_W] = W_W'(wgt[cc][k*K + i]);
        host_write((abase + ROWS + cc) % NB_IN, waddr + k, wd);
      end
    // command
    cfg_t_vis = TS_W'(tv); cfg_t_txt = TS_W'(tt);
    c.modality = mod; c.act_base = IN_BW'(abase); c.wgt_base = IN_BW'(abase + ROWS);
    c.act_addr = IN_AW'(aaddr); c.plane_stride = IN_AW'(stride); c.wgt_addr = IN_AW'(waddr);
    c.n_chunks = IN_AW'(nch); c.out_base = OUT_BW'(obase); c.out_addr = OUT_AW'(oaddr);
    check(cmd_ready, 1, "cmd_ready");
    cmd = c; cmd_valid = 1;
    @(negedge clk);
    cmd_valid = 0; cmd = '0;
    t0 = cycles - 1;              // counter value in the cycle the command was taken
    if (np == 1) n_single_pass++; else n_multi_pass++;
    if (nch >= 112) n_long++;
    // a host write attempted while busy must be refused (it targets the
    // first weight word of this tile; the result check below would catch it)
    check(host_in_ready, 0, "host refused while busy");
    host_in_we = 1; host_in_bank = IN_BW'((abase + ROWS) % NB_IN); host_in_addr = IN_AW'(waddr);
    host_in_wdata = '1;
    @(negedge clk);
    host_in_we = 0;
    n_refused++;
    while (!done) @(negedge clk);
    nlat = cycles - t0;
    check(nlat, nch*np + 4, "tile latency");
    check(busy, 0, "idle at done");
    // read back and compare
    for (int r = 0; r < ROWS; r++) begin
      host_out_re = 1; host_out_bank = OUT_BW'((obase + r) % NB_OUT); host_out_addr = OUT_AW'(oaddr);
      @(negedge clk);
      host_out_re = 0;
      check(host_out_rvalid, 1, "rvalid");
      for (int cc = 0; cc < COLS; cc++) begin
        longint e;
        e = 0;
        for (int i = 0; i < nch*K; i++) e += longint'(act[r][i]) * longint'(wgt[cc][i]);
        check(longint'(signed'(host_out_rdata[ACC_W*cc +: ACC_W])), e, $sformatf("X[%0d][%0d]", r, cc));
      end
    end
  endtask

  initial begin
    cmd_valid = 0; cmd = '0; cfg_t_vis = 3'd3; cfg_t_txt = 3'd4;
    host_in_we = 0; host_in_bank = '0; host_in_addr = '0; host_in_wdata = '0;
    host_out_re = 0; host_out_bank = '0; host_out_addr = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    //        modality    Tv Tt nch abase obase zero dens
    run_tile(MOD_VISUAL,  3, 4, 4,   0,    0,   0,  100);
    run_tile(MOD_TEXT,    3, 4, 4,   5,    3,   1,  60);
    run_tile(MOD_VISUAL,  3, 4, 3,  20,    9,   1,  20);
    run_tile(MOD_TEXT,    2, 3, 2,  31,   15,   0,  50);
    run_tile(MOD_VISUAL,  2, 3, 2,   7,    1,   0,  50);
    run_tile(MOD_TEXT,    3, 4, 112, 16,  6,   0,  40);
    check(n_single_pass > 0, 1, "single-pass tile seen");
    check(n_multi_pass > 0,  1, "multi-pass tile seen");
    check(n_zero_rows > 0,   1, "all-zero spike row seen");
    check(n_neg_spikes > 0,  1, "negative spikes seen");
    check(n_refused > 0,     1, "refused host access seen");
    check(n_rotated > 0,     1, "rotated bank base seen");
    check(n_t_switch > 0,    1, "timestep switch seen");
    check(n_long > 0,        1, "3584-input reduction seen");
    $display("mechanisms: single_pass=%0d multi_pass=%0d zero_rows=%0d neg_spikes=%0d refused=%0d rotated=%0d t_switch=%0d long=%0d",
             n_single_pass, n_multi_pass, n_zero_rows, n_neg_spikes, n_refused, n_rotated, n_t_switch, n_long);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
