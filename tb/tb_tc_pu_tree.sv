// tb_tc_pu_tree: test of the unit tree at N = 16 under hand-made control.
//
// For random channel LLR vectors the testbench drives the per-stage
// controls itself and checks the tree's results against tc_ref_pkg:
//   REP: stages 3, 2, 1 accumulate, stage 0 gives the sign of the total;
//   SPC: stages 3, 2, 1 run the minimum search, stage 0 finishes it, then
//        the parity bit is released through the PTUs and the 8 units of
//        stage 3 must report the corrected decisions in split form;
//   N1 : with the parity path idle, stage 3 reports plain hard decisions;
//   f/g: f steps down to stage 1, then stage 0 decides a pair; a g load on
//        stage 1 with given partial sums, then stage 0 decides again.
module tb_tc_pu_tree;
  import tc_ref_pkg::*;

  localparam int unsigned N  = 16;
  localparam int unsigned NS = 4;

  logic clk = 1'b0, rst_n = 1'b0, ch_load = 1'b0, pcb_en = 1'b0;
  logic signed [3:0] ch_llr [N];
  logic [NS-1:0] r_we, pre_en, ms1, ms2, ms3;
  logic [N/2-1:0] psum;
  logic frz1, frz2, u1, u2, rep_ps, spc_bit;
  logic [N-1:1] ps_l, ps_r;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  tc_pu_tree #(.N(N), .Q(5), .QC(4)) dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(string what, int got, int e);
    checks++;
    if (got != e) begin
      failures++;
      if (failures < 20) $display("%s: got %0d expected %0d", what, got, e);
    end
  endtask

  task automatic idle();
    r_we = '0; pre_en = '0; ms1 = '0; ms2 = '0; ms3 = '0; pcb_en = 0;
  endtask

  task automatic step(input int s, input bit m1, input bit m2, input bit m3, input bit pre);
    idle();
    r_we[s] = 1; ms1[s] = m1; ms2[s] = m2; ms3[s] = m3; pre_en[s] = pre;
    @(negedge clk);
    idle();
  endtask

  initial begin
    ivec_t a, v, l;
    bit    frz [];
    int    lat, flips;
    cnt_t  cnt;
    bvec_t b;
    idle(); psum = '0; frz1 = 0; frz2 = 0;
    foreach (ch_llr[i]) ch_llr[i] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 300; t++) begin
      a = new[N];
      foreach (a[i]) begin a[i] = $urandom_range(0, 15) - 8; ch_llr[i] = 4'(a[i]); end
      ch_load = 1; @(negedge clk); ch_load = 0;

      // REP over the whole frame
      for (int s = 3; s >= 1; s--) step(s, 1, 1, 0, 0);
      frz = new[N]; foreach (frz[i]) frz[i] = (i != N-1);
      lat = 0; flips = 0; b = ref_node(NS, 0, a, frz, lat, cnt, flips);
      #1 chk("REP decision", rep_ps, b[0]);

      // N1: plain hard decisions at stage 3
      #1;
      for (int k = 0; k < 8; k++) begin
        chk("N1 ps_l", ps_l[8+k], (a[k] < 0) ^ (a[k+8] < 0));
        chk("N1 ps_r", ps_r[8+k], (a[k+8] < 0));
      end

      // SPC over the whole frame
      for (int s = 3; s >= 1; s--) step(s, 0, 0, 1, 0);
      @(negedge clk);                    // stage-0 step (select register)
      foreach (frz[i]) frz[i] = (i == 0);
      lat = 0; flips = 0; b = ref_node(NS, 0, a, frz, lat, cnt, flips);
      pcb_en = 1;
      #1;
      for (int k = 0; k < 8; k++) begin
        chk("SPC ps_l", ps_l[8+k], b[k] ^ b[k+8]);
        chk("SPC ps_r", ps_r[8+k], b[k+8]);
      end
      @(negedge clk); idle();

      // f steps to stage 1, pair decision, g load, pair decision
      for (int s = 3; s >= 1; s--) step(s, 0, 0, 0, 1);
      v = a;
      for (int len = 16; len > 2; len /= 2) begin
        l = new[len/2];
        for (int i = 0; i < len/2; i++) l[i] = f_fn(v[i], v[i + len/2]);
        v = l;
      end
      frz1 = $urandom_range(0, 1); frz2 = $urandom_range(0, 1);
      #1;
      begin
        bit e1; int g;
        e1 = frz1 ? 0 : ((v[0] < 0) ^ (v[1] < 0));
        g  = e1 ? sat(v[1] - v[0]) : sat(v[1] + v[0]);
        chk("pair u1", u1, e1);
        chk("pair u2", u2, frz2 ? 0 : (g < 0));
      end
      // g on stage 1 from the stage-2 registers, partial sums random
      begin
        ivec_t w, r;
        bit e1; int g;
        // stage-2 register contents: f of the stage-3 values
        r = new[2];
        w = a;
        l = new[8]; for (int i = 0; i < 8; i++) l[i] = f_fn(w[i], w[i+8]); w = l;
        l = new[4]; for (int i = 0; i < 4; i++) l[i] = f_fn(w[i], w[i+4]); w = l;
        psum = N/2'($urandom);
        for (int i = 0; i < 2; i++) r[i] = psum[i] ? sat(w[i+2] - w[i]) : sat(w[i+2] + w[i]);
        step(1, 0, 1, 0, 0);
        #1;
        e1 = frz1 ? 0 : ((r[0] < 0) ^ (r[1] < 0));
        g  = e1 ? sat(r[1] - r[0]) : sat(r[1] + r[0]);
        chk("g pair u1", u1, e1);
        chk("g pair u2", u2, frz2 ? 0 : (g < 0));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
