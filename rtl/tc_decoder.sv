// tc_decoder: fast-SSC polar decoder, tree architecture (top level).
//
// Decodes one frame of an (N, K) polar code from N channel LLRs.  The unit
// tree (tc_pu_tree) does all arithmetic, the node classifier labels the
// fast constituent codes of the frozen-bit mask, and the controller walks
// the pruned tree.  The code rate is set by the frozen mask alone.
//
// The partial-sum generator is outside this module.  Each cycle in which a
// node finishes, the decoder presents its decided bits on the beta port in
// split form: for a node of 2**m bits at level beta_level and index
// beta_index, entry k < 2**(m-1) carries beta_l[k] = beta[k] ^ beta[k+h]
// and beta_r[k] = beta[k+h], with h = 2**(m-1) (for a two-bit node these
// are u1 and u2).  When g_valid is high in that same cycle, the PSG must
// return on psum[k] the hard decisions beta[k] of the left node that has
// just been completed at level g_level, the finishing node included; the
// decoder loads the g values at the clock edge.  The full hard-decision
// vector of the root, once complete, is the code word estimate; u = x*G.
//
// Frame timing: pulse start with ch_llr and frozen valid; the LLRs are
// captured at that edge, busy is then high for the decoding cycles and
// done pulses once after them.  frozen must stay stable while busy.
module tc_decoder
  import tc_pkg::*;
#(
  parameter int unsigned N  = tc_pkg::N_DEF,
  parameter int unsigned Q  = tc_pkg::Q_DEF,
  parameter int unsigned QC = tc_pkg::QC_DEF,
  localparam int unsigned NS = $clog2(N),
  localparam int unsigned LW = $clog2(NS + 1)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  logic [N-1:0]         frozen,
  input  logic signed [QC-1:0] ch_llr [N],
  output logic                 busy,
  output logic                 done,
  // to the partial-sum generator
  output logic                 beta_valid,
  output logic [LW-1:0]        beta_level,
  output logic [NS-1:0]        beta_index,
  output node_kind_t           beta_kind,
  output logic [N/2-1:0]       beta_l,
  output logic [N/2-1:0]       beta_r,
  output logic                 g_valid,
  output logic [LW-1:0]        g_level,
  // from the partial-sum generator
  input  logic [N/2-1:0]       psum
);
  node_kind_t          kind [1:N-1];
  logic                ch_load, pcb_en, frz1, frz2;
  logic [NS-1:0]       r_we, pre_en, ms1, ms2, ms3;
  logic                u1, u2, rep_ps, spc_bit;
  logic [N-1:1]        ps_l, ps_r;

  tc_node_classifier #(.N(N)) u_cls (.frozen, .kind);

  tc_controller #(.N(N)) u_ctl (
    .clk, .rst_n, .start, .kind, .frozen, .busy, .done, .ch_load,
    .r_we, .pre_en, .ms1, .ms2, .ms3, .pcb_en, .frz1, .frz2,
    .beta_valid, .beta_level, .beta_index, .beta_kind, .g_valid, .g_level
  );

  tc_pu_tree #(.N(N), .Q(Q), .QC(QC)) u_tree (
    .clk, .rst_n, .ch_load, .ch_llr, .r_we, .pre_en, .ms1, .ms2, .ms3,
    .pcb_en, .psum, .frz1, .frz2, .u1, .u2, .rep_ps, .spc_bit, .ps_l, .ps_r
  );

  // Decided bits of the finishing node, taken from the stage that reads its
  // LLRs (stage beta_level-1), or from the stage-0 unit.
  always_comb begin
    int unsigned half;
    half   = 1 << (beta_level - LW'(1));
    beta_l = '0;
    beta_r = '0;
    for (int k = 0; k < N/2; k++) begin
      if (k < half) begin
        unique case (beta_kind)
          NODE_PAIR: begin beta_l[k] = u1; beta_r[k] = u2; end
          NODE_REP:  beta_r[k] = rep_ps;
          NODE_N1, NODE_SPC: begin
            beta_l[k] = ps_l[half + k];
            beta_r[k] = ps_r[half + k];
          end
          default: ;
        endcase
      end
    end
  end
endmodule
