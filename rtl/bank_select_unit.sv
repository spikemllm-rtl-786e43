// bank_select_unit: routing between the memory banks and the PE array.
//
// Read side: in the issue cycle the control unit names the current phase's
// first activation bank (act_base), first weight bank (wgt_base) and the word
// address in each group. Spike channel c reads bank (act_base + c) mod NB_IN,
// weight channel c reads bank (wgt_base + c) mod NB_IN, all at the same word
// address of their group; every other bank stays idle. One cycle later, when
// the SRAMs deliver, the registered bases steer each bank's word to its
// channel and cut it into K lanes (lane i = bits [4i+3:4i]).
// Write side: the ROWS x COLS partial sums are packed row by row (column c at
// bits [ACC_W*c +: ACC_W]) and row r is written to output bank
// (out_base + r) mod NB_OUT at out_addr.
// Its place between memory and array and its job (pick banks by execution
// phase, map data to compute channels) follow the published architecture; the
// rotation rule is this design's choice. The activation and weight bank
// ranges of one phase must not overlap (asserted); bank counts are powers of 2.
module bank_select_unit
  import spk_pkg::*;
(
  input  logic                      clk,
  input  logic                      rst_n,
  // phase descriptor from the control unit (issue cycle)
  input  logic                      rd_en,
  input  logic [IN_BW-1:0]          act_base,
  input  logic [IN_BW-1:0]          wgt_base,
  input  logic [IN_AW-1:0]          act_addr,
  input  logic [IN_AW-1:0]          wgt_addr,
  // to / from the input banks
  output logic                      bank_en    [NB_IN],
  output logic [IN_AW-1:0]          bank_addr  [NB_IN],
  input  logic [WORD_W-1:0]         bank_rdata [NB_IN],
  // to the PE array (one cycle after rd_en)
  output logic        [S_W-1:0]     spikes  [ROWS][K],
  output logic signed [W_W-1:0]     weights [COLS][K],
  // result write-back
  input  logic                      wb_en,
  input  logic [OUT_BW-1:0]         out_base,
  input  logic [OUT_AW-1:0]         out_addr,
  input  logic signed [ACC_W-1:0]   acc [ROWS][COLS],
  output logic                      ob_we    [NB_OUT],
  output logic [OUT_AW-1:0]         ob_addr  [NB_OUT],
  output logic [ROW_W-1:0]          ob_wdata [NB_OUT]
);
  logic [IN_BW-1:0] act_base_q, wgt_base_q;

  // per-bank request decode
  always_comb begin
    for (int b = 0; b < NB_IN; b++) begin
      logic [IN_BW-1:0] da, dw;
      da = IN_BW'(b) - act_base;
      dw = IN_BW'(b) - wgt_base;
      bank_en[b]   = 1'b0;
      bank_addr[b] = '0;
      if (rd_en && (32'(da) < ROWS)) begin
        bank_en[b]   = 1'b1;
        bank_addr[b] = act_addr;
      end else if (rd_en && (32'(dw) < COLS)) begin
        bank_en[b]   = 1'b1;
        bank_addr[b] = wgt_addr;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      act_base_q <= '0;
      wgt_base_q <= '0;
    end else if (rd_en) begin
      act_base_q <= act_base;
      wgt_base_q <= wgt_base;
    end
  end

  // bank words to channel lanes
  always_comb begin
    for (int c = 0; c < ROWS; c++) begin
      logic [WORD_W-1:0] wd;
      wd = bank_rdata[IN_BW'(act_base_q + IN_BW'(c))];
      for (int i = 0; i < K; i++)
        spikes[c][i] = wd[S_W*i +: S_W];
    end
    for (int c = 0; c < COLS; c++) begin
      logic [WORD_W-1:0] wd;
      wd = bank_rdata[IN_BW'(wgt_base_q + IN_BW'(c))];
      for (int i = 0; i < K; i++)
        weights[c][i] = wd[W_W*i +: W_W];
    end
  end

  // result rows to output banks
  always_comb begin
    for (int b = 0; b < NB_OUT; b++) begin
      logic [OUT_BW-1:0] r;
      r = OUT_BW'(b) - out_base;
      ob_we[b]   = wb_en;
      ob_addr[b] = out_addr;
      for (int c = 0; c < COLS; c++)
        ob_wdata[b][ACC_W*c +: ACC_W] = acc[r][c];
    end
  end

  // every row must find an output bank and the two read groups must be disjoint
  initial begin
    assert (NB_OUT == ROWS) else $error("bank_select_unit: NB_OUT must equal ROWS");
    assert (NB_IN >= ROWS + COLS) else $error("bank_select_unit: too few input banks");
    assert ((NB_IN & (NB_IN - 1)) == 0) else $error("bank_select_unit: NB_IN must be a power of 2");
  end

  a_groups_disjoint: assert property (@(posedge clk) disable iff (!rst_n)
    rd_en |-> (32'(IN_BW'(wgt_base - act_base)) >= ROWS) &&
              (32'(IN_BW'(act_base - wgt_base)) >= COLS));
endmodule
