// tc_pu0: processing unit of stage 0, the bottom of the tree.
//
// It takes the two LLRs of a two-bit node and decides both bits in one
// cycle:
//   u1 = sign(llr1) ^ sign(llr2), the sign of f(llr1, llr2);
//   u2 = sign of g, where the sum llr1+llr2 or the difference llr2-llr1 is
//        picked at once by u1 (the f result is fed straight back, no
//        partial-sum wait).
// Frozen bits are forced to 0 through frz1/frz2 (this design's way of
// telling the unit which bits are frozen).  The same hardware serves the
// last step of the fast nodes:
//   rep_ps  = sign of llr1+llr2: the decision of a repetition node whose
//             LLRs the adder tree has summed down to two;
//   spc_bit = sign(llr1) ^ sign(llr2): the parity of a single-parity-check
//             node whose hard decisions the comparator tree has XORed down;
//   ss      = comparator result |llr2| < |llr1|, registered every cycle
//             (the parity check always follows in the very next cycle, so
//             the register needs no hold path); it selects the first PTU.
// All outputs but ss are combinational.  Saturating arithmetic and the
// active-low asynchronous reset are this design's choices.
module tc_pu0
#(
  parameter int unsigned Q = tc_pkg::Q_DEF
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic signed [Q-1:0] llr1,
  input  logic signed [Q-1:0] llr2,
  input  logic                frz1,     // first bit of the pair is frozen
  input  logic                frz2,     // second bit of the pair is frozen
  output logic                u1,
  output logic                u2,
  output logic                rep_ps,   // partial sum for a REP node
  output logic                spc_bit,  // single parity check bit
  output logic                ss        // select signal for the first PTU
);
  logic         s1, s2;
  logic [Q-2:0] m1, m2;
  logic signed [Q-1:0] sum, diff, g_val;

  localparam logic signed [Q:0] MAXV = (Q+1)'(2**(Q-1) - 1);
  localparam logic signed [Q:0] MINV = -MAXV;

  // Symmetric saturation of a Q+1 bit sum to +/-(2**(Q-1)-1).
  function automatic logic signed [Q-1:0] sat(input logic signed [Q:0] s);
    if (s > MAXV)       return MAXV[Q-1:0];
    else if (s < MINV) return MINV[Q-1:0];
    else                return s[Q-1:0];
  endfunction

  tc_c2s #(.Q(Q)) u_c2s1 (.c(llr1), .sign(s1), .mag(m1));
  tc_c2s #(.Q(Q)) u_c2s2 (.c(llr2), .sign(s2), .mag(m2));

  always_comb begin
    sum     = sat({llr1[Q-1], llr1} + {llr2[Q-1], llr2});
    diff    = sat({llr2[Q-1], llr2} - {llr1[Q-1], llr1});
    spc_bit = s1 ^ s2;
    u1      = frz1 ? 1'b0 : spc_bit;
    g_val   = u1 ? diff : sum;
    u2      = frz2 ? 1'b0 : g_val[Q-1];
    rep_ps  = sum[Q-1];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) ss <= 1'b0;
    else        ss <= (m2 < m1);
  end
endmodule
