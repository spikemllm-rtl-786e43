// control_unit: sequencing of one output tile, with modality-aware timesteps.
//
// A tile is ROWS tokens x COLS output features reduced over n_chunks chunks of
// K inputs. The tile's modality selects its timestep count T_m: cfg_t_vis for
// visual tokens, cfg_t_txt for text tokens (3 and 4 after reset, the main
// T_v/T_t = 3/4 setting). The PE resolves T_PE = 3 magnitude levels per
// pass, so a tile runs P = ceil(T_m / 3) passes over every chunk: pass p reads
// magnitude plane p of the activations, stored plane_stride words after plane
// p-1 and holding magnitude bits 3p..3p+2 with the value's sign, and the
// array weights its result by 2^(3p). For T_m <= 3 there is a single pass.
// The weight word of a chunk is re-read in each of its passes.
//
// Timing: the command is taken in a cycle with cmd_valid and cmd_ready. The
// next n_chunks*P cycles issue one chunk-pass each (bank reads; the matching
// array controls mm_* follow one cycle later, aligned with the SRAM data).
// When the array reports acc_done the unit writes the 16 result rows in that
// same cycle (wb_en) and raises done for one cycle after it, n_chunks*P + 4
// cycles after the command was taken. busy covers the whole tile.
// The unit's duties come from the published architecture; the command format,
// the plane layout and the pass scheme for T_m > 3 are this design's choices.
module control_unit
  import spk_pkg::*;
(
  input  logic                 clk,
  input  logic                 rst_n,
  // tile commands
  input  logic                 cmd_valid,
  output logic                 cmd_ready,
  input  tile_cmd_t            cmd,
  input  logic [TS_W-1:0]      cfg_t_vis,
  input  logic [TS_W-1:0]      cfg_t_txt,
  output logic                 busy,
  output logic                 done,
  // bank select, read side (issue cycle)
  output logic                 rd_en,
  output logic [IN_BW-1:0]     act_base,
  output logic [IN_BW-1:0]     wgt_base,
  output logic [IN_AW-1:0]     act_addr,
  output logic [IN_AW-1:0]     wgt_addr,
  // PE array (one cycle after the issue cycle)
  output logic                 mm_valid,
  output logic                 mm_first,
  output logic                 mm_last,
  output logic [SH_W-1:0]      mm_shift,
  input  logic                 acc_done,
  // bank select, write-back
  output logic                 wb_en,
  output logic [OUT_BW-1:0]    out_base,
  output logic [OUT_AW-1:0]    out_addr
);
  typedef enum logic [1:0] {S_IDLE, S_ISSUE, S_WAIT} state_e;

  state_e          state;
  tile_cmd_t       cq;
  logic [1:0]      n_pass;      // passes per chunk, 1..3
  logic [1:0]      pass;
  logic [IN_AW-1:0] chunk;
  logic [IN_AW-1:0] plane_off;
  logic            first_c, last_c;
  logic [TS_W-1:0] t_m;
  logic [1:0]      n_pass_d;

  // passes for the incoming command
  always_comb begin
    t_m = (cmd.modality == MOD_TEXT) ? cfg_t_txt : cfg_t_vis;
    if (t_m <= TS_W'(T_PE))        n_pass_d = 2'd1;
    else if (t_m <= TS_W'(2*T_PE)) n_pass_d = 2'd2;
    else                           n_pass_d = 2'd3;
  end

  assign cmd_ready = (state == S_IDLE);
  assign busy      = (state != S_IDLE);

  assign rd_en    = (state == S_ISSUE);
  assign act_base = cq.act_base;
  assign wgt_base = cq.wgt_base;
  assign act_addr = cq.act_addr + chunk + plane_off;
  assign wgt_addr = cq.wgt_addr + chunk;
  assign first_c  = (chunk == '0) && (pass == '0);
  assign last_c   = (chunk == cq.n_chunks - 1'b1) && (pass == n_pass - 1'b1);

  assign wb_en    = (state == S_WAIT) && acc_done;
  assign out_base = cq.out_base;
  assign out_addr = cq.out_addr;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      cq        <= '0;
      n_pass    <= 2'd1;
      pass      <= '0;
      chunk     <= '0;
      plane_off <= '0;
      mm_valid  <= 1'b0;
      mm_first  <= 1'b0;
      mm_last   <= 1'b0;
      mm_shift  <= '0;
      done      <= 1'b0;
    end else begin
      mm_valid <= rd_en;
      mm_first <= rd_en && first_c;
      mm_last  <= rd_en && last_c;
      mm_shift <= SH_W'(pass) * SH_W'(T_PE);
      done     <= wb_en;
      unique case (state)
        S_IDLE: if (cmd_valid) begin
          cq        <= cmd;
          n_pass    <= n_pass_d;
          pass      <= '0;
          chunk     <= '0;
          plane_off <= '0;
          state     <= S_ISSUE;
        end
        S_ISSUE: begin
          if (last_c)
            state <= S_WAIT;
          if (pass == n_pass - 1'b1) begin
            pass      <= '0;
            plane_off <= '0;
            chunk     <= chunk + 1'b1;
          end else begin
            pass      <= pass + 1'b1;
            plane_off <= plane_off + cq.plane_stride;
          end
        end
        S_WAIT: if (acc_done) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  a_cmd_chunks: assert property (@(posedge clk) disable iff (!rst_n)
    cmd_valid && cmd_ready |-> cmd.n_chunks != '0);
  a_cmd_timesteps: assert property (@(posedge clk) disable iff (!rst_n)
    cmd_valid && cmd_ready |-> t_m != '0);
endmodule
