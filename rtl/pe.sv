// pe: spike-driven dot-product unit, the accelerator's compute primitive.
//
// X = sum_i s[i]*w[i] without a multiplier. Each two's-complement spike value
// s[i] goes through sign-magnitude conversion (smc) into a polarity bit and T
// binary significance levels. For every level t, the level bit gates w[i]
// (AND), sign adjustment (SA) negates the gated term when the polarity bit is
// set, and one adder tree per level sums the K signed terms. The T partial
// sums are then shifted left by t-1 and added (Shift & Adder): level t carries
// the temporal weight 2^(t-1). A level bit of 0 contributes nothing, which is
// the spike-driven bypass of the weight.
// The structure, the T=3 levels and the 4-bit spike and weight widths follow
// the published PE; K=32 is derived from the published peak throughput. The
// unit is purely combinational; the array registers its result.
module pe #(
  parameter int unsigned K  = 32,   // vector length
  parameter int unsigned T  = 3,    // magnitude levels
  parameter int unsigned WW = 4     // weight width
) (
  input  logic        [T:0]                 s [K],   // spike values
  input  logic signed [WW-1:0]              w [K],   // weights
  output logic signed [WW+$clog2(K)+T:0]    x        // dot product
);
  localparam int unsigned TW = WW + 1;               // signed term width
  localparam int unsigned PW = TW + $clog2(K);       // per-level partial sum
  localparam int unsigned XW = WW + $clog2(K) + T + 1;

  logic                 pol [K];
  logic [T-1:0]         mag [K];
  logic signed [TW-1:0] term [T][K];
  logic signed [PW-1:0] psum [T];

  for (genvar i = 0; i < K; i++) begin : g_smc
    smc #(.T(T)) u_smc (.s(s[i]), .pol(pol[i]), .mag(mag[i]));
  end

  // AND gating by the level bit, then sign adjustment by the polarity bit
  always_comb begin
    for (int t = 0; t < T; t++)
      for (int i = 0; i < K; i++) begin
        if (!mag[i][t])
          term[t][i] = '0;
        else if (pol[i])
          term[t][i] = -TW'(w[i]);
        else
          term[t][i] = TW'(w[i]);
      end
  end

  for (genvar t = 0; t < T; t++) begin : g_tree
    adder_tree #(.N(K), .IW(TW)) u_tree (.in(term[t]), .sum(psum[t]));
  end

  // Shift & Adder: level t+1 weighted by 2^t
  always_comb begin
    x = '0;
    for (int t = 0; t < T; t++)
      x = x + (XW'(psum[t]) <<< t);
  end
endmodule
