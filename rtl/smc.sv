// smc: sign-magnitude conversion of one spike value (the "SMC" of the PE).
//
// A polar TC-LIF spike value arrives in two's complement, T+1 bits wide, and is
// split into a polarity bit (the inhibitory/excitatory sign) and T magnitude
// bits; magnitude bit t-1 is significance level t, whose temporal weight is
// 2^(t-1). Purely combinational. The range is the symmetric [-(2^T-1), 2^T-1]
// that TC-LIF produces after dropping its extreme level; should the dropped
// code -2^T arrive anyway, this design saturates it to magnitude 2^T-1 (a
// choice of this design: the published description says nothing about it).
module smc #(
  parameter int unsigned T = 3
) (
  input  logic [T:0]   s,     // two's-complement spike value
  output logic         pol,   // 1: negative (inhibitory) spike
  output logic [T-1:0] mag    // magnitude bits, bit t-1 = level t
);
  logic [T:0] neg;

  always_comb begin
    pol = s[T];
    neg = -s;
    if (!s[T])
      mag = s[T-1:0];
    else if (neg[T])                 // -2^T: dropped level, saturate
      mag = {T{1'b1}};
    else
      mag = neg[T-1:0];
  end
endmodule
