// tc_node_classifier: finds the fast constituent codes of the decoding tree.
//
// From the frozen-bit mask (frozen[i] = 1 when u_i is a frozen bit) it
// labels every internal node of the tree, in heap order (root = 1, the
// children of node h are 2h and 2h+1, leaf i is N+i):
//   N0  : every bit below is frozen;
//   N1  : no bit below is frozen;
//   REP : only the last bit below is information;
//   SPC : only the first bit below is frozen;
//   PAIR: any two-bit node (decoded by the stage-0 unit in one cycle);
//   REG : anything else.
// The labels are built bottom-up with one gate per flag and node:
// N0(v) = N0(l) & N0(r), N1(v) = N1(l) & N1(r), REP(v) = N0(l) & REP(r),
// SPC(v) = SPC(l) & N1(r), with a leaf counting as REP when it is an
// information bit and as SPC when it is frozen.  Because the labels are
// derived from the mask, one decoder serves every code rate: changing the
// mask changes the control signals and nothing else.  The classification
// rules follow the constituent-code definitions; doing it in logic rather
// than from a stored schedule is this design's choice.  Purely
// combinational.  The labels of the two-bit nodes (heap N/2 .. N-1) are
// the constant PAIR; they are kept so that every internal node has a label.
module tc_node_classifier
  import tc_pkg::*;
#(
  parameter int unsigned N = tc_pkg::N_DEF
) (
  input  logic [N-1:0]  frozen,
  output node_kind_t    kind [1:N-1]
);
  logic [2*N-1:1] z, o, rp, sp;   // N0, N1, REP, SPC flags per heap node

  for (genvar i = 0; i < N; i++) begin : g_leaf
    assign z[N+i]  =  frozen[i];
    assign o[N+i]  = ~frozen[i];
    assign rp[N+i] = ~frozen[i];
    assign sp[N+i] =  frozen[i];
  end

  for (genvar h = 1; h < N; h++) begin : g_node
    assign z[h]  = z[2*h]  & z[2*h+1];
    assign o[h]  = o[2*h]  & o[2*h+1];
    assign rp[h] = z[2*h]  & rp[2*h+1];
    assign sp[h] = sp[2*h] & o[2*h+1];
    if (h >= N/2) begin : g_pair
      assign kind[h] = NODE_PAIR;
    end else begin : g_big
      always_comb begin
        if (z[h])       kind[h] = NODE_N0;
        else if (o[h])  kind[h] = NODE_N1;
        else if (rp[h]) kind[h] = NODE_REP;
        else if (sp[h]) kind[h] = NODE_SPC;
        else            kind[h] = NODE_REG;
      end
    end
  end
endmodule
