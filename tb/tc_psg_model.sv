// tc_psg_model: behavioural partial-sum generator for the decoder testbenches.
//
// Behavioural model, not synthesizable hardware.  The decoder takes its
// partial sums from an external generator; this model stands in for it.
// It keeps, per tree level, the hard decisions of the last finished left
// node.  When the decoder offers the decided bits of a node (split form
// beta_l/beta_r), the model rebuilds the node's full decision vector,
// climbs while the node is a right child, combining with the stored left
// sibling as beta = [beta_left ^ beta_right, beta_right], and returns the
// decisions of the node where the climb stops on psum, in the same cycle.
// At the clock edge that vector is stored for its level; at the root it is
// the code word estimate x_hat, and root_done pulses.
module tc_psg_model
  import tc_pkg::*;
#(
  parameter int unsigned N = 16,
  localparam int unsigned NS = $clog2(N),
  localparam int unsigned LW = $clog2(NS + 1)
) (
  input  logic            clk,
  input  logic            beta_valid,
  input  logic [LW-1:0]   beta_level,
  input  logic [NS-1:0]   beta_index,
  input  logic [N/2-1:0]  beta_l,
  input  logic [N/2-1:0]  beta_r,
  input  logic            g_valid,
  input  logic [LW-1:0]   g_level,
  output logic [N/2-1:0]  psum,
  output logic [N-1:0]    x_hat,
  output logic            root_done
);
  logic [N-1:0] bst [NS+1];
  logic [N-1:0] cur, nxt;
  int           lev, idx;

  initial begin
    for (int l = 0; l <= NS; l++) bst[l] = '0;
    x_hat = '0;
    root_done = 1'b0;
  end

  always_comb begin
    int h;
    cur = '0;
    lev = int'(beta_level);
    idx = int'(beta_index);
    h   = 1 << (lev - 1);
    for (int k = 0; k < N/2; k++)
      if (k < h) begin
        cur[k]     = beta_l[k] ^ beta_r[k];
        cur[k + h] = beta_r[k];
      end
    for (int t = 0; t < NS; t++)
      if (lev < NS && idx[0]) begin
        nxt = '0;
        for (int k = 0; k < N/2; k++)
          if (k < (1 << lev)) begin
            nxt[k]              = bst[lev][k] ^ cur[k];
            nxt[k + (1 << lev)] = cur[k];
          end
        cur = nxt;
        lev = lev + 1;
        idx = idx >> 1;
      end
    psum = cur[N/2-1:0];
  end

  always @(posedge clk) begin
    root_done <= 1'b0;
    if (beta_valid) begin
      bst[lev] <= cur;
      if (lev == NS) begin
        x_hat     <= cur;
        root_done <= 1'b1;
      end
    end
  end

  a_g_level: assert property (@(posedge clk) g_valid |-> beta_valid && int'(g_level) == lev);
endmodule
