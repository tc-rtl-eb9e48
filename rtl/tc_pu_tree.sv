// tc_pu_tree: the tree of processing units, their stage registers and the
// parity transmit units.
//
// Stage s (s = 0 .. n-1, N = 2**n) holds 2**s units, N-1 in all: the
// stage-0 unit tc_pu0 and ordinary tc_pu units above it.  Every value is
// kept in one heap-ordered array r[1 .. 2N-1]: the output register R of
// unit k of stage s is r[2**s + k], and the channel LLR buffer is
// r[N .. 2N-1] (channel LLR i at r[N+i], sign-extended from QC to Q bits).
// Unit k of stage s reads r[2**(s+1) + k] and r[2**(s+1) + k + 2**s],
// i.e. alpha[i] and alpha[i + half] of the node on the stage above, exactly
// the pairs of the f and g equations.  (The block diagram draws the two
// inputs of a unit next to each other; that is the same tree with the
// wires in bit-reversed order.)
//
// Stage 0 has no output register: its decisions go to the partial-sum
// generator.  Behind every unit of stages 0 .. n-2 sits a PTU (N/2-1 in
// all); it splits the parity bit arriving at that unit between the two
// units that feed it, so after an SPC minimum search the bit reaches the
// unit whose input held the least reliable LLR in the cycle it is enabled
// (pcb_en).  With pcb_en low every unit sees "parity or 0" = 0.
//
// Control is per stage, shared by all units of a stage: r_we (load R),
// pre_en (capture sum/difference), ms1, ms2, ms3 (mode selects).  Unit k
// of any stage takes psum[k] from the PSG as its g select.  ch_load copies
// ch_llr into the channel buffer.  All registers reset to 0 (active-low,
// asynchronous); that choice is this design's own.
module tc_pu_tree #(
  parameter int unsigned N  = tc_pkg::N_DEF,
  parameter int unsigned Q  = tc_pkg::Q_DEF,
  parameter int unsigned QC = tc_pkg::QC_DEF,
  localparam int unsigned NS = $clog2(N)          // number of stages n
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 ch_load,
  input  logic signed [QC-1:0] ch_llr [N],
  input  logic [NS-1:0]        r_we,
  input  logic [NS-1:0]        pre_en,
  input  logic [NS-1:0]        ms1,
  input  logic [NS-1:0]        ms2,
  input  logic [NS-1:0]        ms3,
  input  logic                 pcb_en,
  input  logic [N/2-1:0]       psum,
  input  logic                 frz1,      // stage-0 pair: first bit frozen
  input  logic                 frz2,      // stage-0 pair: second bit frozen
  output logic                 u1,
  output logic                 u2,
  output logic                 rep_ps,
  output logic                 spc_bit,
  output logic [N-1:1]         ps_l,      // heap order: unit 2**s+k
  output logic [N-1:1]         ps_r
);
  logic signed [Q-1:0] r    [1:2*N-1];  // stage registers and channel buffer
  logic signed [Q-1:0] pout [1:N-1];    // unit outputs
  logic [N-1:1]        ss;              // select signals
  logic [N-1:1]        pcb;             // "parity or 0" into each unit
  logic [N-1:1]        pcb_src;         // parity bit a PTU forwards

  // Channel LLR buffer.
  for (genvar i = 0; i < N; i++) begin : g_ch
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n)       r[N+i] <= '0;
      else if (ch_load) r[N+i] <= Q'(ch_llr[i]);
    end
  end

  // Stage-0 unit.
  tc_pu0 #(.Q(Q)) u_pu0 (
    .clk, .rst_n, .llr1(r[2]), .llr2(r[3]), .frz1, .frz2,
    .u1, .u2, .rep_ps, .spc_bit, .ss(ss[1])
  );
  assign pout[1]    = '0;
  assign ps_l[1]    = u1;
  assign ps_r[1]    = u2;
  assign pcb[1]     = 1'b0;
  assign pcb_src[1] = pcb_en & spc_bit;
  assign r[1]       = '0;

  for (genvar s = 1; s < NS; s++) begin : g_stage
    for (genvar k = 0; k < 2**s; k++) begin : g_unit
      localparam int unsigned P  = 2**s + k;          // this unit
      localparam int unsigned I1 = 2**(s+1) + k;      // first input
      localparam int unsigned I2 = 2**(s+1) + k + 2**s;
      tc_pu #(.Q(Q)) u_pu (
        .clk, .rst_n, .llr1(r[I1]), .llr2(r[I2]),
        .pre_en(pre_en[s]), .ms1(ms1[s]), .ms2(ms2[s]), .ms3(ms3[s]),
        .psum(psum[k]), .pcb(pcb[P]),
        .llr_out(pout[P]), .ss(ss[P]), .ps_l(ps_l[P]), .ps_r(ps_r[P])
      );
      assign pcb_src[P] = pcb[P];
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n)       r[P] <= '0;
        else if (r_we[s]) r[P] <= pout[P];
      end
    end
  end

  // PTUs behind the units of stages 0 .. n-2: unit P at stage s forwards
  // to the units 2**(s+1)+k (O1) and 2**(s+1)+k+2**s (O2) of stage s+1.
  for (genvar s = 0; s < NS - 1; s++) begin : g_ptu_stage
    for (genvar k = 0; k < 2**s; k++) begin : g_ptu
      localparam int unsigned P = 2**s + k;
      tc_ptu u_ptu (
        .pcb(pcb_src[P]), .ss(ss[P]),
        .o1(pcb[2**(s+1) + k]), .o2(pcb[2**(s+1) + k + 2**s])
      );
    end
  end
endmodule
