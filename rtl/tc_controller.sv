// tc_controller: scheduler of the fast-SSC tree decoder.
//
// It walks the decoding tree depth first, one operation per clock cycle,
// and drives the per-stage controls of the unit tree.  A node at level m
// (2**m bits; its LLRs sit in the stage-m registers, the channel buffer for
// m = n) is handled by its kind:
//   REG  : 1 cycle.  Stage m-1 computes f into its registers and captures
//          sum and difference for the later g (pre-computation); the walk
//          goes on with the left child.
//   PAIR : 1 cycle.  The stage-0 unit decides both bits.
//   N0   : 1 cycle.  All decisions are 0.
//   N1   : 1 cycle.  Stage m-1 gives the hard decisions of its inputs.
//   REP  : m cycles.  Stages m-1 .. 1 add pairs (mode select 1 = 1, mode
//          select 2 = 1) into their registers; in the last cycle the
//          stage-0 unit adds the last pair and its sign is the decision.
//   SPC  : m+1 cycles.  Stages m-1 .. 1 run f (minimum and parity) into
//          their registers and load their select signals (mode select 3),
//          the stage-0 unit finishes the search; in the extra cycle the
//          parity bit is released (pcb_en) through the PTUs and stage m-1
//          gives the corrected decisions.
// In the last cycle of a node the decided bits are offered to the partial-
// sum generator (beta_valid, with beta_level, beta_index and beta_kind).
// The walk then climbs while the finished node is a right child; at the
// first left child, at level m', the stage-m' units load g into their
// registers in the same cycle (g_valid, g_level: mode select 2 = 1, mode
// select 1 = 0), selected by the partial sums the PSG returns for that
// node, and the next cycle starts on its right sibling.  When the climb
// reaches the root the frame is done.  A regular node thus costs one cycle
// beyond its children, so a tree with no fast node takes N-1 cycles, and
// the fast-node latencies are 1, 1, log2(size) and log2(size)+1.
//
// Interface: start (while idle) loads the channel buffer (ch_load) and
// begins a frame in the next cycle; busy is high for exactly the frame's
// decoding cycles; done pulses for one cycle after the last one.  The
// latencies per node kind are the design's; the cycle-level arrangement
// (the g load in the node's last cycle, the stage used by each step) is
// this design's own.
module tc_controller
  import tc_pkg::*;
#(
  parameter int unsigned N = tc_pkg::N_DEF,
  localparam int unsigned NS = $clog2(N),
  localparam int unsigned LW = $clog2(NS + 1)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  node_kind_t        kind [1:N-1],
  input  logic [N-1:0]      frozen,
  output logic              busy,
  output logic              done,
  output logic              ch_load,
  output logic [NS-1:0]     r_we,
  output logic [NS-1:0]     pre_en,
  output logic [NS-1:0]     ms1,
  output logic [NS-1:0]     ms2,
  output logic [NS-1:0]     ms3,
  output logic              pcb_en,
  output logic              frz1,
  output logic              frz2,
  output logic              beta_valid,
  output logic [LW-1:0]     beta_level,
  output logic [NS-1:0]     beta_index,
  output node_kind_t        beta_kind,
  output logic              g_valid,
  output logic [LW-1:0]     g_level
);
  logic [LW-1:0] lvl, lvl_n;      // level of the current node
  logic [NS-1:0] idx, idx_n;      // its index within the level
  logic [LW-1:0] step, step_n;    // cycle within a multi-cycle node
  logic          busy_n, done_n;
  node_kind_t    cur;
  logic [NS-1:0] hidx;
  logic          complete;
  logic [LW-1:0] up_lvl;          // level reached by the climb
  logic [NS-1:0] up_idx;
  logic [LW-1:0] stg;             // stage used by the current REP/SPC step

  always_comb begin
    hidx = NS'(1) << (LW'(NS) - lvl);
    hidx = hidx | idx;
    cur  = (lvl == LW'(1)) ? NODE_PAIR : kind[hidx];
    stg  = lvl - LW'(1) - step;
  end

  // Climb from the current node while it is a right child.
  always_comb begin
    up_lvl = lvl;
    up_idx = idx;
    for (int t = 0; t < NS; t++) begin
      if (up_lvl < LW'(NS) && up_idx[0]) begin
        up_lvl = up_lvl + LW'(1);
        up_idx = up_idx >> 1;
      end
    end
  end

  always_comb begin
    r_we       = '0;
    pre_en     = '0;
    ms1        = '0;
    ms2        = '0;
    ms3        = '0;
    pcb_en     = 1'b0;
    frz1       = frozen[{idx[NS-2:0], 1'b0}];
    frz2       = frozen[{idx[NS-2:0], 1'b1}];
    complete   = 1'b0;
    beta_valid = 1'b0;
    beta_level = lvl;
    beta_index = idx;
    beta_kind  = cur;
    g_valid    = 1'b0;
    g_level    = up_lvl;
    lvl_n      = lvl;
    idx_n      = idx;
    step_n     = step + LW'(1);
    busy_n     = busy;
    done_n     = 1'b0;
    ch_load    = start & ~busy;

    if (busy) begin
      unique case (cur)
        NODE_REG: begin
          r_we[lvl-LW'(1)]   = 1'b1;
          pre_en[lvl-LW'(1)] = 1'b1;
          lvl_n  = lvl - LW'(1);
          idx_n  = idx << 1;
          step_n = '0;
        end
        NODE_PAIR, NODE_N0, NODE_N1: complete = 1'b1;
        NODE_REP: begin
          if (stg != '0) begin
            r_we[stg] = 1'b1;
            ms1[stg]  = 1'b1;
            ms2[stg]  = 1'b1;
          end
          complete = (stg == '0);
        end
        NODE_SPC: begin
          if (step == lvl) begin
            pcb_en   = 1'b1;
            complete = 1'b1;
          end else if (stg != '0) begin
            r_we[stg] = 1'b1;
            ms3[stg]  = 1'b1;
          end
        end
        default: ;
      endcase

      if (complete) begin
        beta_valid = 1'b1;
        step_n     = '0;
        if (up_lvl == LW'(NS)) begin
          busy_n = 1'b0;
          done_n = 1'b1;
        end else begin
          g_valid         = 1'b1;
          r_we[up_lvl]    = 1'b1;
          ms2[up_lvl]     = 1'b1;
          lvl_n           = up_lvl;
          idx_n           = up_idx | NS'(1);
        end
      end
    end else if (start) begin
      busy_n = 1'b1;
      lvl_n  = LW'(NS);
      idx_n  = '0;
      step_n = '0;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0;
      done <= 1'b0;
      lvl  <= LW'(NS);
      idx  <= '0;
      step <= '0;
    end else begin
      busy <= busy_n;
      done <= done_n;
      lvl  <= lvl_n;
      idx  <= idx_n;
      step <= step_n;
    end
  end

  // A g load only happens in the last cycle of a finished node, never in
  // an f step, and a frame never starts while one is running.
  a_g_not_in_f: assert property (@(posedge clk) disable iff (!rst_n)
    g_valid |-> busy && cur != NODE_REG);
  a_one_stage_g: assert property (@(posedge clk) disable iff (!rst_n)
    g_valid |-> $onehot(r_we));
endmodule
