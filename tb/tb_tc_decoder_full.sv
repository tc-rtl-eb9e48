// tb_tc_decoder_full: the decoder at its default size, N = 1024, on the
// codes it is specified for.
//
// Frozen sets come from the Bhattacharyya-parameter construction for an
// AWGN channel at a design Eb/N0 of 2.5 dB: each tree node passes its
// parameter z to its left child as 2z - z^2 and to its right child as z^2,
// and the K leaves with the smallest z carry information.  (The frozen sets
// the decoder was originally evaluated with are not known, so the
// latencies here need not match the published ones exactly.)
//   1. (1024,512) and (1024,870): several frames of noisy BPSK, 4-bit
//      integer LLRs; code word, decoded bits and latency are compared with
//      the bit-accurate model, and the frame error count is reported.
//   2. Rate sweep 0.05 .. 0.95: one frame each; the latency is checked
//      against the model and reported with the reduction relative to the
//      0.75N-1 cycles of a two-bit pre-computation SC decoder.
module tb_tc_decoder_full;
  import tc_pkg::*;
  import tc_ref_pkg::*;

  localparam int unsigned N  = N_DEF;
  localparam int unsigned NS = $clog2(N);
  localparam int unsigned LW = $clog2(NS + 1);

  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  logic [N-1:0] frozen;
  logic signed [QC_DEF-1:0] ch_llr [N];
  logic busy, done, beta_valid, g_valid, root_done;
  logic [LW-1:0] beta_level, g_level;
  logic [NS-1:0] beta_index;
  node_kind_t beta_kind;
  logic [N/2-1:0] beta_l, beta_r, psum;
  logic [N-1:0] x_hat;
  real z [N];

  int checks = 0, failures = 0, cyc = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  tc_decoder dut (
    .clk, .rst_n, .start, .frozen, .ch_llr, .busy, .done,
    .beta_valid, .beta_level, .beta_index, .beta_kind, .beta_l, .beta_r,
    .g_valid, .g_level, .psum
  );

  tc_psg_model #(.N(N)) psg (
    .clk, .beta_valid, .beta_level, .beta_index, .beta_l, .beta_r,
    .g_valid, .g_level, .psum, .x_hat, .root_done
  );

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog: simulation did not finish");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic void bhat(int lvl, real zz, int off);
    if (lvl == 0) z[off] = zz;
    else begin
      bhat(lvl - 1, 2.0*zz - zz*zz, off);
      bhat(lvl - 1, zz*zz, off + (1 << (lvl - 1)));
    end
  endfunction

  // Frozen mask of an (N, k) code: the N-k leaves with the largest z.
  function automatic logic [N-1:0] construct(int k);
    logic [N-1:0] m = '1;
    int order [$];
    real rate = real'(k) / N;
    bhat(NS, $exp(-rate * (10.0 ** (2.5 / 10.0))), 0);
    for (int i = 0; i < N; i++) order.push_back(i);
    order.sort() with (z[item]);
    for (int i = 0; i < k; i++) m[order[i]] = 1'b0;
    return m;
  endfunction

  function automatic real gauss();
    real u1, u2;
    u1 = (real'($urandom) + 1.0) / 4294967297.0;
    u2 = real'($urandom) / 4294967296.0;
    return $sqrt(-2.0 * $ln(u1)) * $cos(6.283185307179586 * u2);
  endfunction

  // Decode one frame; returns 1 when it decoded to the sent bits.
  task automatic frame(input int k, input real ebn0_db, output int lat_hw,
                       output int lat_ref, output bit ok);
    bvec_t u, x, xr, xh;
    ivec_t a;
    bit    frz [];
    int    flips, t0;
    cnt_t  cnt;
    real   sigma, es;
    u = new[N]; a = new[N]; frz = new[N]; xh = new[N];
    for (int i = 0; i < N; i++) begin
      frz[i] = frozen[i];
      u[i]   = frozen[i] ? 1'b0 : 1'($urandom_range(0, 1));
    end
    x  = polar_transform(u);
    es = real'(k) / N * (10.0 ** (ebn0_db / 10.0));
    sigma = $sqrt(1.0 / (2.0 * es));
    for (int i = 0; i < N; i++) begin
      real y, l;
      int  q;
      y = (x[i] ? -1.0 : 1.0) + sigma * gauss();
      l = 2.0 * y / (sigma * sigma);
      q = $rtoi(l < 0 ? l - 0.5 : l + 0.5);
      if (q > 7) q = 7;
      if (q < -8) q = -8;
      a[i] = q;
      ch_llr[i] = QC_DEF'(q);
    end
    lat_ref = 0; flips = 0;
    foreach (cnt[i]) cnt[i] = 0;
    xr = ref_node(NS, 0, a, frz, lat_ref, cnt, flips);
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    t0 = cyc;
    while (!done) @(negedge clk);
    @(negedge clk);
    lat_hw = cyc - t0 - 1;
    for (int i = 0; i < N; i++) xh[i] = x_hat[i];
    checks++;
    if (xh != xr) begin failures++; $display("(%0d,%0d): code word differs from the model", N, k); end
    checks++;
    if (lat_hw != lat_ref) begin
      failures++; $display("(%0d,%0d): latency %0d, model %0d", N, k, lat_hw, lat_ref);
    end
    ok = (polar_transform(xh) == u);
  endtask

  initial begin
    int lat_hw, lat_ref, nok;
    bit ok;
    int codes [2] = '{512, 870};
    real snr [2] = '{3.0, 4.0};
    frozen = '1;
    foreach (ch_llr[i]) ch_llr[i] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;

    for (int c = 0; c < 2; c++) begin
      frozen = construct(codes[c]);
      nok = 0;
      for (int f = 0; f < 8; f++) begin
        frame(codes[c], snr[c], lat_hw, lat_ref, ok);
        nok += ok;
      end
      $display("(%0d,%0d): latency %0d cycles, %0d of 8 frames correct at Eb/N0 = %0.1f dB",
               N, codes[c], lat_hw, nok, snr[c]);
      checks++;
      if (nok < 5) begin failures++; $display("(%0d,%0d): too many frame errors", N, codes[c]); end
    end

    for (int r = 1; r <= 19; r++) begin
      int k;
      k = (N * r * 5 + 50) / 100;
      frozen = construct(k);
      frame(k, 4.0, lat_hw, lat_ref, ok);
      $display("rate %0.2f (k=%0d): latency %0d cycles, reduction %0.1f%% against 0.75N-1",
               r * 0.05, k, lat_hw, 100.0 * (1.0 - real'(lat_hw) / (0.75 * N - 1)));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
