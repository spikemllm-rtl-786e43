// spikemllm_accel: spike-driven matrix accelerator for polar TC-LIF spikes.
//
// Computes output tiles X = S * W^T of a spiking linear layer, where S holds
// ROWS=16 tokens of polar TC-LIF spike values (4-bit, magnitude up to 7, sign
// carried as spike polarity) and W holds COLS=16 rows of 4-bit weights, each
// reduced over n_chunks x K inputs. The four published components are here:
// memory_banks (on-chip SRAM, 44 MiB), bank_select_unit (routes banks to
// channels and results back), control_unit (sequencing, modality-aware
// timesteps) and spiking_matmul_unit (16x16 spike-driven dot-product PEs).
//
// Use: while busy is low, the host loads spike planes and weights into the
// input banks (host_in_*), one K-lane word per cycle. It then issues a tile
// command (cmd_valid/cmd_ready, fields in spk_pkg::tile_cmd_t). The tile runs
// n_chunks * ceil(T_m/3) cycles of issue plus 4 cycles of pipeline and
// write-back; done pulses when the 16 result rows (16 x 32-bit sums each) are
// in the output banks, from where the host reads them (host_out_*, one row
// per request, data one cycle later). Host requests while busy are refused.
// The host port stands where the off-chip memory interface would be, which
// the published design models but does not describe.
module spikemllm_accel
  import spk_pkg::*;
(
  input  logic                 clk,
  input  logic                 rst_n,
  // tile commands and timestep configuration
  input  logic                 cmd_valid,
  output logic                 cmd_ready,
  input  tile_cmd_t            cmd,
  input  logic [TS_W-1:0]      cfg_t_vis,
  input  logic [TS_W-1:0]      cfg_t_txt,
  output logic                 busy,
  output logic                 done,
  // host / off-chip side
  input  logic                 host_in_we,
  input  logic [IN_BW-1:0]     host_in_bank,
  input  logic [IN_AW-1:0]     host_in_addr,
  input  logic [WORD_W-1:0]    host_in_wdata,
  output logic                 host_in_ready,
  input  logic                 host_out_re,
  input  logic [OUT_BW-1:0]    host_out_bank,
  input  logic [OUT_AW-1:0]    host_out_addr,
  output logic                 host_out_ready,
  output logic [ROW_W-1:0]     host_out_rdata,
  output logic                 host_out_rvalid
);
  // control unit <-> bank select / array
  logic                rd_en, wb_en;
  logic [IN_BW-1:0]    act_base, wgt_base;
  logic [IN_AW-1:0]    act_addr, wgt_addr;
  logic [OUT_BW-1:0]   out_base;
  logic [OUT_AW-1:0]   out_addr;
  logic                mm_valid, mm_first, mm_last, acc_done;
  logic [SH_W-1:0]     mm_shift;

  // bank select <-> memory banks
  logic                bank_en    [NB_IN];
  logic [IN_AW-1:0]    bank_addr  [NB_IN];
  logic [WORD_W-1:0]   bank_rdata [NB_IN];
  logic                ob_we      [NB_OUT];
  logic [OUT_AW-1:0]   ob_addr    [NB_OUT];
  logic [ROW_W-1:0]    ob_wdata   [NB_OUT];

  // bank select <-> array
  logic        [S_W-1:0]   spikes  [ROWS][K];
  logic signed [W_W-1:0]   weights [COLS][K];
  logic signed [ACC_W-1:0] acc     [ROWS][COLS];

  control_unit u_ctrl (
    .clk, .rst_n,
    .cmd_valid, .cmd_ready, .cmd, .cfg_t_vis, .cfg_t_txt, .busy, .done,
    .rd_en, .act_base, .wgt_base, .act_addr, .wgt_addr,
    .mm_valid, .mm_first, .mm_last, .mm_shift, .acc_done,
    .wb_en, .out_base, .out_addr);

  bank_select_unit u_bsel (
    .clk, .rst_n,
    .rd_en, .act_base, .wgt_base, .act_addr, .wgt_addr,
    .bank_en, .bank_addr, .bank_rdata,
    .spikes, .weights,
    .wb_en, .out_base, .out_addr, .acc,
    .ob_we, .ob_addr, .ob_wdata);

  memory_banks u_mem (
    .clk, .rst_n, .busy,
    .in_en(bank_en), .in_addr(bank_addr), .in_rdata(bank_rdata),
    .out_we(ob_we), .out_addr(ob_addr), .out_wdata(ob_wdata),
    .host_in_we, .host_in_bank, .host_in_addr, .host_in_wdata, .host_in_ready,
    .host_out_re, .host_out_bank, .host_out_addr, .host_out_ready,
    .host_out_rdata, .host_out_rvalid);

  spiking_matmul_unit u_array (
    .clk, .rst_n,
    .in_valid(mm_valid), .in_first(mm_first), .in_last(mm_last), .in_shift(mm_shift),
    .spikes, .weights, .acc, .acc_done);
endmodule
