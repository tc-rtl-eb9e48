// tc_s2c: sign-magnitude to two's complement converter ("S2C" of the PU).
//
// Rebuilds a Q-bit two's complement value from a sign bit and a Q-1 bit
// magnitude.  Purely combinational.  A negative zero becomes 0, so the sign
// of a zero-magnitude result is lost, as in any two's complement datapath.
module tc_s2c #(
  parameter int unsigned Q = tc_pkg::Q_DEF
) (
  input  logic                sign,
  input  logic        [Q-2:0] mag,
  output logic signed [Q-1:0] c
);
  always_comb c = sign ? -$signed({1'b0, mag}) : $signed({1'b0, mag});
endmodule
