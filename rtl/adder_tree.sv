// adder_tree: balanced binary reduction of N signed terms (the PE's
// per-level "Adder Tree").
//
// The inputs are padded with zeros to the next power of two and summed pairwise
// in clog2(N) levels of two-input adders; each level is one bit wider than the
// one before, so the sum never overflows. Purely combinational: the published
// PE names the adder tree but not its structure, so the balanced, unpipelined
// form is this design's choice.
module adder_tree #(
  parameter int unsigned N  = 32,   // number of terms
  parameter int unsigned IW = 5     // width of each signed term
) (
  input  logic signed [IW-1:0]               in  [N],
  output logic signed [IW+$clog2(N)-1:0]     sum
);
  localparam int unsigned LV = (N > 1) ? $clog2(N) : 1;
  localparam int unsigned NP = 1 << LV;
  localparam int unsigned OW = IW + $clog2(N);

  // node[l][i]: level l holds NP>>l partial sums, all kept at the full width
  logic signed [OW-1:0] node [LV+1][NP];

  always_comb begin
    for (int l = 0; l <= LV; l++)
      for (int i = 0; i < NP; i++)
        node[l][i] = '0;
    for (int i = 0; i < NP; i++)
      node[0][i] = (i < N) ? OW'(in[i]) : '0;
    for (int l = 1; l <= LV; l++)
      for (int i = 0; i < (NP >> l); i++)
        node[l][i] = node[l-1][2*i] + node[l-1][2*i+1];
    sum = (N > 1) ? node[LV][0] : node[0][0];
  end
endmodule
