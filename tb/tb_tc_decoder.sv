// tb_tc_decoder: end-to-end test of the fast-SSC decoder at N = 64.
//
// Decodes a series of frames, each with its own frozen mask, and compares
// the code word estimate, the decoded bits u = x*G and the frame latency in
// cycles with the bit-accurate software model in tc_ref_pkg.  The masks mix
// random densities, rate 0 and rate 1 codes, a mask with no fast node at
// all (latency N-1) and the masks of (N, N/2) style codes, so every
// mechanism of the schedule occurs: f steps with pre-computed g loads,
// two-bit nodes, N0, N1, REP and SPC nodes, and SPC parity corrections
// routed through the PTUs.  Each mechanism is counted and one that never
// happened counts as a failure.  The LLRs come from noisy BPSK code words.
module tb_tc_decoder;
  import tc_pkg::*;
  import tc_ref_pkg::*;

  localparam int unsigned N  = 64;
  localparam int unsigned NS = $clog2(N);
  localparam int unsigned LW = $clog2(NS + 1);
  localparam int FRAMES = 60;

  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  logic [N-1:0] frozen;
  logic signed [QC_DEF-1:0] ch_llr [N];
  logic busy, done, beta_valid, g_valid, root_done;
  logic [LW-1:0] beta_level, g_level;
  logic [NS-1:0] beta_index;
  node_kind_t beta_kind;
  logic [N/2-1:0] beta_l, beta_r, psum;
  logic [N-1:0] x_hat;

  int checks = 0, failures = 0;
  int cyc = 0;
  int seen [6];
  int g_loads = 0, f_steps = 0, pcb_flips = 0, ok_frames = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  tc_decoder #(.N(N)) dut (
    .clk, .rst_n, .start, .frozen, .ch_llr, .busy, .done,
    .beta_valid, .beta_level, .beta_index, .beta_kind, .beta_l, .beta_r,
    .g_valid, .g_level, .psum
  );

  tc_psg_model #(.N(N)) psg (
    .clk, .beta_valid, .beta_level, .beta_index, .beta_l, .beta_r,
    .g_valid, .g_level, .psum, .x_hat, .root_done
  );

  // Mechanism counters, observed at the decoder's ports and control.
  always @(posedge clk) begin
    if (beta_valid) seen[beta_kind]++;
    if (g_valid) g_loads++;
    if (busy && dut.u_ctl.cur == NODE_REG) f_steps++;
    if (dut.u_ctl.pcb_en && dut.u_tree.spc_bit) pcb_flips++;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog: simulation did not finish");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [N-1:0] make_mask(int f);
    logic [N-1:0] m;
    int dens;
    case (f % 6)
      0: m = '0;                             // rate 1
      1: m = '1;                             // rate 0
      2: for (int i = 0; i < N; i++) m[i] = (i % 2 == 0); // no fast node
      3: begin                               // (N, N/2): first half frozen
           m = '0; for (int i = 0; i < N/2; i++) m[i] = 1'b1;
         end
      default: begin
        dens = $urandom_range(15, 85);
        for (int i = 0; i < N; i++) m[i] = ($urandom_range(0, 99) < dens);
        // bias towards a reliability-like order: frozen early, info late
        for (int i = 0; i < N; i++)
          if ($urandom_range(0, 3) == 0) m[i] = (i < N*dens/100);
      end
    endcase
    return m;
  endfunction

  initial begin
    bvec_t u, x, xr, ur, xh;
    ivec_t a;
    bit    frz [];
    int    lat, t0, flips;
    cnt_t  cnt;
    foreach (seen[i]) seen[i] = 0;
    frozen = '0;
    foreach (ch_llr[i]) ch_llr[i] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk);

    for (int f = 0; f < FRAMES; f++) begin
      frozen = make_mask(f);
      u = new[N]; a = new[N]; frz = new[N];
      for (int i = 0; i < N; i++) begin
        frz[i] = frozen[i];
        u[i]   = frozen[i] ? 1'b0 : 1'($urandom_range(0, 1));
      end
      x = polar_transform(u);
      for (int i = 0; i < N; i++) begin
        int v;
        v = $urandom_range(1, 7) - ($urandom_range(0, 5) == 0 ? $urandom_range(3, 9) : 0);
        v = x[i] ? -v : v;
        if (v > 7) v = 7;
        if (v < -8) v = -8;
        a[i] = v;
        ch_llr[i] = QC_DEF'(v);
      end
      lat = 0; flips = 0;
      foreach (cnt[i]) cnt[i] = 0;
      xr = ref_node(NS, 0, a, frz, lat, cnt, flips);
      ur = polar_transform(xr);

      @(negedge clk);
      start = 1'b1;
      @(negedge clk);
      start = 1'b0;
      t0 = cyc;
      while (!done) @(negedge clk);
      // busy was high from t0 to the cycle before done
      @(negedge clk);

      xh = new[N];
      for (int i = 0; i < N; i++) xh[i] = x_hat[i];
      checks++;
      if (xh != xr) begin
        failures++;
        $display("frame %0d: code word estimate differs from the model", f);
      end
      checks++;
      if (polar_transform(xh) != ur) begin
        failures++;
        $display("frame %0d: decoded bits differ from the model", f);
      end
      checks++;
      if (cyc - t0 - 1 != lat) begin
        failures++;
        $display("frame %0d: latency %0d cycles, expected %0d", f, cyc - t0 - 1, lat);
      end
      if (f % 6 == 2) begin
        checks++;
        if (lat != N - 1) begin
          failures++;
          $display("frame %0d: a tree with no fast node should take N-1 cycles, got %0d", f, lat);
        end
      end
      if (polar_transform(xh) == u) ok_frames++;
    end

    // every mechanism must have happened
    checks++; if (f_steps == 0)          begin failures++; $display("no f step"); end
    checks++; if (g_loads == 0)          begin failures++; $display("no g load"); end
    checks++; if (seen[NODE_PAIR] == 0)  begin failures++; $display("no two-bit node"); end
    checks++; if (seen[NODE_N0] == 0)    begin failures++; $display("no N0 node"); end
    checks++; if (seen[NODE_N1] == 0)    begin failures++; $display("no N1 node"); end
    checks++; if (seen[NODE_REP] == 0)   begin failures++; $display("no REP node"); end
    checks++; if (seen[NODE_SPC] == 0)   begin failures++; $display("no SPC node"); end
    checks++; if (pcb_flips == 0)        begin failures++; $display("no SPC parity correction"); end
    $display("mechanisms: f=%0d g=%0d pair=%0d N0=%0d N1=%0d REP=%0d SPC=%0d parity=%0d; frames decoded to the sent word: %0d/%0d",
             f_steps, g_loads, seen[NODE_PAIR], seen[NODE_N0], seen[NODE_N1],
             seen[NODE_REP], seen[NODE_SPC], pcb_flips, ok_frames, FRAMES);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
