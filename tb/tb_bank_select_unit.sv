// tb_bank_select_unit: bank request decode, bank-to-channel mapping of the
// fetched words (one cycle after the request) and result-row mapping to the
// output banks, for random bank bases and addresses.
module tb_bank_select_unit;
  import spk_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  logic                    rd_en, wb_en;
  logic [IN_BW-1:0]        act_base, wgt_base;
  logic [IN_AW-1:0]        act_addr, wgt_addr;
  logic                    bank_en    [NB_IN];
  logic [IN_AW-1:0]        bank_addr  [NB_IN];
  logic [WORD_W-1:0]       bank_rdata [NB_IN];
  logic        [S_W-1:0]   spikes  [ROWS][K];
  logic signed [W_W-1:0]   weights [COLS][K];
  logic [OUT_BW-1:0]       out_base;
  logic [OUT_AW-1:0]       out_addr;
  logic signed [ACC_W-1:0] acc [ROWS][COLS];
  logic                    ob_we    [NB_OUT];
  logic [OUT_AW-1:0]       ob_addr  [NB_OUT];
  logic [ROW_W-1:0]        ob_wdata [NB_OUT];
  int checks = 0, failures = 0, cycles = 0;

  bank_select_unit dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycles++;

  initial begin : watchdog
    wait (cycles == 20000);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input logic [31:0] got, exp, input string what);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s got %h expected %h", what, got, exp);
    end
  endtask

  initial begin
    rd_en = 0; wb_en = 0; act_base = '0; wgt_base = '0; act_addr = '0; wgt_addr = '0;
    out_base = '0; out_addr = '0;
    for (int b = 0; b < NB_IN; b++) bank_rdata[b] = '0;
    for (int r = 0; r < ROWS; r++) for (int c = 0; c < COLS; c++) acc[r][c] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 200; n++) begin
      int ab;
      // request cycle
      ab = $urandom_range(NB_IN-1);
      rd_en = 1;
      act_base = IN_BW'(ab);
      wgt_base = IN_BW'(ab + ROWS);
      act_addr = IN_AW'($urandom); wgt_addr = IN_AW'($urandom);
      #1;
      for (int b = 0; b < NB_IN; b++) begin
        int d;
        d = (b - ab + NB_IN) % NB_IN;
        check(32'(bank_en[b]), 1, "bank_en");
        check(32'(bank_addr[b]), 32'((d < ROWS) ? act_addr : wgt_addr), "bank_addr");
      end
      @(negedge clk);
      // data cycle: the next request is idle, words come back
      rd_en = 0;
      for (int b = 0; b < NB_IN; b++)
        bank_rdata[b] = {$urandom, $urandom, $urandom, $urandom};
      #1;
      for (int b = 0; b < NB_IN; b++) check(32'(bank_en[b]), 0, "bank idle");
      for (int c = 0; c < ROWS; c++)
        for (int i = 0; i < K; i++) begin
          check(32'(spikes[c][i]), 32'(bank_rdata[(ab + c) % NB_IN][S_W*i +: S_W]), "spike lane");
          check(32'(unsigned'(weights[c][i])), 32'(bank_rdata[(ab + ROWS + c) % NB_IN][W_W*i +: W_W]), "weight lane");
        end
      // write-back mapping
      wb_en = n[0];
      out_base = OUT_BW'($urandom); out_addr = OUT_AW'($urandom);
      for (int r = 0; r < ROWS; r++) for (int c = 0; c < COLS; c++) acc[r][c] = $urandom;
      #1;
      for (int r = 0; r < ROWS; r++) begin
        int b;
        b = (r + int'(out_base)) % NB_OUT;
        check(32'(ob_we[b]), 32'(wb_en), "ob_we");
        check(32'(ob_addr[b]), 32'(out_addr), "ob_addr");
        for (int c = 0; c < COLS; c++)
          check(ob_wdata[b][ACC_W*c +: ACC_W], acc[r][c], "ob_wdata");
      end
      @(negedge clk);
      wb_en = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
