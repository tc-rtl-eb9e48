// tc_c2s: two's complement to sign-magnitude converter ("C2S" of the PU).
//
// Splits a Q-bit two's complement LLR into its sign bit and a Q-1 bit
// magnitude.  Purely combinational.  The most negative value, which the
// saturating datapath never produces, is clipped to the largest magnitude.
module tc_c2s #(
  parameter int unsigned Q = tc_pkg::Q_DEF
) (
  input  logic signed [Q-1:0] c,     // two's complement value
  output logic                sign,  // 1 = negative
  output logic        [Q-2:0] mag    // |c|
);
  logic [Q-1:0] neg;
  always_comb begin
    sign = c[Q-1];
    neg  = -c;
    if (!c[Q-1])              mag = c[Q-2:0];
    else if (neg[Q-1])        mag = '1;          // -2**(Q-1): clip
    else                      mag = neg[Q-2:0];
  end
endmodule
