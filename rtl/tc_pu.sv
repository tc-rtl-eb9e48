// tc_pu: processing unit (PU) of stages 1 .. n-1 of the tree decoder.
//
// One PU takes two inner LLRs, llr1 = alpha[i] and llr2 = alpha[i+N/2] of
// the node its stage is working on, and produces one output LLR:
//   f path  : C2S on both inputs, an unsigned comparator picks the smaller
//             magnitude, the output sign is the XOR of the input signs and
//             S2C turns the result back.  f(a,b) for a regular node, and the
//             step of the minimum search for a single-parity-check (SPC)
//             node, where the sign carries the running parity.
//   g path  : the sum llr1+llr2 and the difference llr2-llr1 are computed
//             in the same cycle as f (pre-computation) and held in two
//             registers; the partial sum from the PSG picks one later, which
//             is g(beta, a, b) = (-1)^beta * a + b.
//   acc path: the unregistered sum, used to add up the LLRs of a repetition
//             (REP) node through the adder tree.
// Mode select 1 chooses registered g (0) or direct sum (1); mode select 2
// chooses the f/minimum path (0) or the g/accumulation path (1); mode
// select 3 loads the comparator result into the select-signal register (1)
// or holds it (0), because the SPC search lasts several cycles before the
// parity comes back.  The select signal drives the PTU behind this PU.
//
// Towards the partial-sum generator the PU gives, per the block diagram,
// ps_l = sign1 ^ sign2 ^ pcb, where pcb is the "parity or 0" bit from the
// PTU in front of it.  This design adds ps_r = sign2 ^ (pcb & ss): the hard
// decision of the second input with the parity applied where the minimum
// was.  Together (ps_l, ps_r) are the decided bits of an N1 or SPC node in
// the split form (beta[i]^beta[i+N/2], beta[i+N/2]).  Saturating arithmetic,
// the operand order of the subtractor and the active-low asynchronous reset
// are this design's choices.
//
// Timing: the output llr_out is combinational; the stage register R that
// holds it lives outside, in the tree.  sum/diff registers load when pre_en
// is high; the select-signal register loads when ms3 is high.
module tc_pu
#(
  parameter int unsigned Q = tc_pkg::Q_DEF
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic signed [Q-1:0] llr1,
  input  logic signed [Q-1:0] llr2,
  input  logic                pre_en,   // capture sum and difference
  input  logic                ms1,      // 0: registered g, 1: direct sum
  input  logic                ms2,      // 0: f / minimum, 1: g / accumulation
  input  logic                ms3,      // 1: load select signal, 0: hold
  input  logic                psum,     // partial sum from the PSG
  input  logic                pcb,      // parity check bit or 0, from PTU
  output logic signed [Q-1:0] llr_out,
  output logic                ss,       // select signal for the PTU
  output logic                ps_l,     // to PSG: sign1 ^ sign2 ^ pcb
  output logic                ps_r      // to PSG: sign2 ^ (pcb & ss)
);
  logic         s1, s2;
  logic [Q-2:0] m1, m2, mmin;
  logic         cmp;       // 1 when |llr2| < |llr1|
  logic signed [Q-1:0] f_val, sum, diff, sum_q, diff_q, g_val, gacc;

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
    cmp  = (m2 < m1);
    mmin = cmp ? m2 : m1;
  end

  tc_s2c #(.Q(Q)) u_s2c (.sign(s1 ^ s2), .mag(mmin), .c(f_val));

  always_comb begin
    sum  = sat({llr1[Q-1], llr1} + {llr2[Q-1], llr2});
    diff = sat({llr2[Q-1], llr2} - {llr1[Q-1], llr1});
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sum_q  <= '0;
      diff_q <= '0;
      ss     <= 1'b0;
    end else begin
      if (pre_en) begin
        sum_q  <= sum;
        diff_q <= diff;
      end
      if (ms3) ss <= cmp;
    end
  end

  always_comb begin
    g_val   = psum ? diff_q : sum_q;
    gacc    = ms1 ? sum : g_val;
    llr_out = ms2 ? gacc : f_val;
    ps_l    = s1 ^ s2 ^ pcb;
    ps_r    = s2 ^ (pcb & ss);
  end
endmodule
