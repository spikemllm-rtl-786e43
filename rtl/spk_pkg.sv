// spk_pkg: shared sizes and types of the spike-driven matrix accelerator.
//
// The accelerator multiplies polar, temporally weighted spike vectors (TC-LIF
// coding: a value in [-7,7] is a polarity bit plus three binary significance
// levels) by 4-bit weights on a 16x16 array of multiplier-free dot-product PEs.
// Numbers taken from the published design: three magnitude levels per PE
// (T=3), 4-bit spikes and weights, a 16x16 PE array, 44 MiB of on-chip memory.
// The PE length K=32 follows from the published peak throughput
// (256 PEs x 32 MAC x 2 op x 333 MHz = 5.45 TOPS). Bank counts, depths, the
// partial-sum width and the command format are this design's own choices.
package spk_pkg;

  // PE datapath
  parameter int unsigned T_PE  = 3;          // magnitude levels (timesteps) per pass
  parameter int unsigned S_W   = T_PE + 1;   // spike value width, two's complement
  parameter int unsigned W_W   = 4;          // weight width, two's complement
  parameter int unsigned K     = 32;         // elements per PE dot product
  parameter int unsigned ROWS  = 16;         // spike channels (array rows)
  parameter int unsigned COLS  = 16;         // weight channels (PEs per row)
  parameter int unsigned ACC_W = 32;         // partial-sum register width

  // Memory organisation: 32 x 65536 x 128 bit + 16 x 12288 x 512 bit = 44 MiB
  parameter int unsigned WORD_W    = K * S_W;            // 128-bit operand word
  parameter int unsigned NB_IN     = 32;                 // activation + weight banks
  parameter int unsigned IN_DEPTH  = 65536;
  parameter int unsigned IN_AW     = $clog2(IN_DEPTH);
  parameter int unsigned NB_OUT    = 16;                 // result banks, one per row
  parameter int unsigned OUT_DEPTH = 12288;
  parameter int unsigned OUT_AW    = $clog2(OUT_DEPTH);
  parameter int unsigned ROW_W     = COLS * ACC_W;       // 512-bit result row
  parameter int unsigned IN_BW     = $clog2(NB_IN);
  parameter int unsigned OUT_BW    = $clog2(NB_OUT);

  parameter int unsigned TS_W  = 3;          // width of a timestep count (1..7)
  parameter int unsigned SH_W  = 3;          // width of a pass shift (0, 3, 6)

  typedef enum logic {MOD_VISUAL = 1'b0, MOD_TEXT = 1'b1} modality_e;

  // One output tile: ROWS tokens x COLS output features over n_chunks*K inputs.
  typedef struct packed {
    modality_e            modality;     // selects T_v or T_t
    logic [IN_BW-1:0]     act_base;     // first activation bank
    logic [IN_BW-1:0]     wgt_base;     // first weight bank
    logic [IN_AW-1:0]     act_addr;     // first activation word (plane 0)
    logic [IN_AW-1:0]     plane_stride; // word offset between magnitude planes
    logic [IN_AW-1:0]     wgt_addr;     // first weight word
    logic [IN_AW-1:0]     n_chunks;     // K-chunks in the reduction, >= 1
    logic [OUT_BW-1:0]    out_base;     // output bank that receives row 0
    logic [OUT_AW-1:0]    out_addr;     // result word address
  } tile_cmd_t;

endpackage
