// spiking_matmul_unit: ROWS x COLS array of spike-driven dot-product PEs.
//
// Each compute step ("chunk-pass") brings ROWS spike vectors and COLS weight
// vectors of K elements. Spike vector r is broadcast along row r, weight
// vector c along column c, so PE(r,c) computes the K-element dot product of
// the two and the whole array needs only ROWS+COLS operand vectors per step.
// Results are kept in the array (output stationary): every PE owns a partial
// sum register that accumulates its dot product, left-shifted by in_shift,
// over all the chunk-passes of a tile. in_first restarts the sums.
// in_shift carries the temporal weight of an extra magnitude pass (2^3 for
// levels 4..6) when a modality uses more timesteps than the PE's T levels.
//
// Timing: two register stages. Operands presented with in_valid in cycle n are
// multiplied into the PE output register at the end of cycle n and reach acc
// at the end of cycle n+1; acc_done is high in the cycle after the last
// chunk-pass (in_last) reached acc, and acc then holds the finished tile.
// The broadcast array of 16x16 PEs follows the published architecture;
// the output-stationary accumulation, the partial-sum width and the pipeline
// are this design's choices.
module spiking_matmul_unit
  import spk_pkg::*;
#(
  parameter int unsigned R_N   = ROWS,
  parameter int unsigned C_N   = COLS,
  parameter int unsigned K_N   = K,
  parameter int unsigned T_N   = T_PE,
  parameter int unsigned WW    = W_W,
  parameter int unsigned AW    = ACC_W
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  input  logic                     in_first,
  input  logic                     in_last,
  input  logic [SH_W-1:0]          in_shift,
  input  logic        [T_N:0]      spikes  [R_N][K_N],
  input  logic signed [WW-1:0]     weights [C_N][K_N],
  output logic signed [AW-1:0]     acc     [R_N][C_N],
  output logic                     acc_done
);
  localparam int unsigned XW = WW + $clog2(K_N) + T_N + 1;

  logic signed [XW-1:0] x     [R_N][C_N];
  logic signed [XW-1:0] x_q   [R_N][C_N];
  logic                 v_q, first_q, last_q;
  logic [SH_W-1:0]      shift_q;

  for (genvar r = 0; r < R_N; r++) begin : g_row
    for (genvar c = 0; c < C_N; c++) begin : g_col
      pe #(.K(K_N), .T(T_N), .WW(WW)) u_pe (
        .s(spikes[r]), .w(weights[c]), .x(x[r][c]));
    end
  end

  // Stage 1: PE results
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v_q     <= 1'b0;
      first_q <= 1'b0;
      last_q  <= 1'b0;
      shift_q <= '0;
      for (int r = 0; r < R_N; r++)
        for (int c = 0; c < C_N; c++)
          x_q[r][c] <= '0;
    end else begin
      v_q     <= in_valid;
      first_q <= in_first;
      last_q  <= in_last;
      shift_q <= in_shift;
      if (in_valid)
        x_q <= x;
    end
  end

  // Stage 2: shifted accumulation into the partial-sum registers
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc_done <= 1'b0;
      for (int r = 0; r < R_N; r++)
        for (int c = 0; c < C_N; c++)
          acc[r][c] <= '0;
    end else begin
      acc_done <= v_q && last_q;
      if (v_q)
        for (int r = 0; r < R_N; r++)
          for (int c = 0; c < C_N; c++)
            acc[r][c] <= (first_q ? AW'(0) : acc[r][c]) + (AW'(x_q[r][c]) <<< shift_q);
    end
  end

  // A chunk-pass sequence starts with in_first; in_last marks its end.
  property p_last_needs_valid;
    @(posedge clk) disable iff (!rst_n) in_last |-> in_valid;
  endproperty
  a_last_needs_valid: assert property (p_last_needs_valid);

endmodule
