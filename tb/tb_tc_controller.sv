// tb_tc_controller: cycle-exact test of the decoder scheduler at N = 64.
//
// For random frozen masks the testbench labels the tree itself and builds,
// by a recursive walk of the tree, the list of control words the schedule
// calls for, one per cycle: f steps (register write and pre-computation
// capture on stage m-1), REP accumulation steps, SPC minimum steps and the
// parity cycle, N0/N1/two-bit decisions, and the g load on stage m-1 in the
// last cycle of every left child of a regular node.  The controller's
// outputs are compared with that list cycle by cycle; the number of busy
// cycles is the frame latency and must equal the list length.
module tb_tc_controller;
  import tc_pkg::*;

  localparam int unsigned N  = 64;
  localparam int unsigned NS = $clog2(N);
  localparam int unsigned LW = $clog2(NS + 1);

  typedef struct {
    logic [NS-1:0] r_we, pre_en, ms1, ms2, ms3;
    logic          pcb_en, beta_valid, g_valid, is_pair;
    int            level, index, g_level;
  } cword_t;

  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  node_kind_t kind [1:N-1];
  logic [N-1:0] frozen;
  logic busy, done, ch_load, pcb_en, frz1, frz2, beta_valid, g_valid;
  logic [NS-1:0] r_we, pre_en, ms1, ms2, ms3;
  logic [LW-1:0] beta_level, g_level;
  logic [NS-1:0] beta_index;
  node_kind_t beta_kind;

  int checks = 0, failures = 0;
  cword_t exp_q [$];
  int nkind [6];

  always #5 clk = ~clk;

  tc_controller #(.N(N)) dut (.*);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic node_kind_t kind_of(int lvl, int j);
    int sz = 1 << lvl, nf = 0;
    for (int i = 0; i < sz; i++) nf += frozen[j*sz + i];
    if (lvl == 1)                               return NODE_PAIR;
    if (nf == sz)                               return NODE_N0;
    if (nf == 0)                                return NODE_N1;
    if (nf == sz - 1 && !frozen[j*sz + sz - 1]) return NODE_REP;
    if (nf == 1 && frozen[j*sz])                return NODE_SPC;
    return NODE_REG;
  endfunction

  function automatic cword_t blank();
    cword_t c;
    c.r_we = '0; c.pre_en = '0; c.ms1 = '0; c.ms2 = '0; c.ms3 = '0;
    c.pcb_en = 0; c.beta_valid = 0; c.g_valid = 0; c.is_pair = 0;
    c.level = 0; c.index = 0; c.g_level = 0;
    return c;
  endfunction

  // Emit the control words of node (lvl, j) onto exp_q.
  function automatic void walk(int lvl, int j);
    node_kind_t k = kind_of(lvl, j);
    cword_t c;
    nkind[k]++;
    case (k)
      NODE_REG: begin
        c = blank();
        c.r_we[lvl-1] = 1; c.pre_en[lvl-1] = 1;
        exp_q.push_back(c);
        walk(lvl - 1, 2*j);
        // g load on stage lvl-1 in the left child's last cycle
        c = exp_q.pop_back();
        c.g_valid = 1; c.g_level = lvl - 1;
        c.r_we[lvl-1] = 1; c.ms2[lvl-1] = 1;
        exp_q.push_back(c);
        walk(lvl - 1, 2*j + 1);
        return;
      end
      NODE_REP: begin
        for (int s = lvl - 1; s >= 1; s--) begin
          c = blank();
          c.r_we[s] = 1; c.ms1[s] = 1; c.ms2[s] = 1;
          exp_q.push_back(c);
        end
        c = blank();
      end
      NODE_SPC: begin
        for (int s = lvl - 1; s >= 1; s--) begin
          c = blank();
          c.r_we[s] = 1; c.ms3[s] = 1;
          exp_q.push_back(c);
        end
        exp_q.push_back(blank());     // stage-0 step of the minimum search
        c = blank();
        c.pcb_en = 1;
      end
      default: begin
        c = blank();
        c.is_pair = (k == NODE_PAIR);
      end
    endcase
    c.beta_valid = 1; c.level = lvl; c.index = j;
    exp_q.push_back(c);
  endfunction

  task automatic chk(string what, logic [63:0] got, logic [63:0] e, int cyc);
    checks++;
    if (got !== e) begin
      failures++;
      if (failures < 20) $display("cycle %0d: %s got %0h expected %0h", cyc, what, got, e);
    end
  endtask

  initial begin
    frozen = '0;
    foreach (nkind[i]) nkind[i] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int f = 0; f < 40; f++) begin
      int dens;
      dens = (f == 0) ? 50 : $urandom_range(5, 95);
      for (int i = 0; i < N; i++) frozen[i] = ($urandom_range(0, 99) < dens);
      if (f == 1) frozen = '0;
      if (f == 2) frozen = '1;
      for (int h = 1; h < N; h++) begin
        int lvl;
        lvl = NS;
        for (int t = h; t > 1; t /= 2) lvl--;
        kind[h] = kind_of(lvl, h - (1 << (NS - lvl)));
      end
      exp_q.delete();
      walk(NS, 0);
      @(negedge clk);
      start = 1;
      #1 chk("ch_load", ch_load, 1, 0);
      @(negedge clk);
      start = 0;
      for (int cyc = 0; exp_q.size() > 0; cyc++) begin
        cword_t e;
        e = exp_q.pop_front();
        chk("busy", busy, 1, cyc);
        chk("r_we", r_we, e.r_we, cyc);
        chk("pre_en", pre_en, e.pre_en, cyc);
        chk("ms1", ms1, e.ms1, cyc);
        chk("ms2", ms2, e.ms2, cyc);
        chk("ms3", ms3, e.ms3, cyc);
        chk("pcb_en", pcb_en, e.pcb_en, cyc);
        chk("beta_valid", beta_valid, e.beta_valid, cyc);
        chk("g_valid", g_valid, e.g_valid, cyc);
        if (e.beta_valid) begin
          chk("beta_level", beta_level, e.level, cyc);
          chk("beta_index", beta_index, e.index, cyc);
        end
        if (e.g_valid) chk("g_level", g_level, e.g_level, cyc);
        if (e.is_pair) begin
          chk("frz1", frz1, frozen[2*e.index], cyc);
          chk("frz2", frz2, frozen[2*e.index+1], cyc);
        end
        @(negedge clk);
      end
      chk("idle after frame", busy, 0, -1);
      chk("done", done, 1, -1);
    end
    for (int k = 0; k < 6; k++) begin
      checks++;
      if (nkind[k] == 0) begin failures++; $display("node kind %0d never scheduled", k); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
