// tb_tc_node_classifier: test of the node classifier at N = 64.
//
// For random frozen masks of varied density, and for masks made of fast
// blocks, every internal node's label is compared with a direct count of
// the frozen bits below it: N0 (all frozen), N1 (none), REP (all but the
// last), SPC (only the first), PAIR for two-bit nodes, else REG.
module tb_tc_node_classifier;
  import tc_pkg::*;

  localparam int unsigned N  = 64;
  localparam int unsigned NS = $clog2(N);
  logic [N-1:0] frozen;
  node_kind_t   kind [1:N-1];
  int checks = 0, failures = 0;
  int seen [6];

  tc_node_classifier #(.N(N)) dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic node_kind_t expect_kind(int h);
    int lvl, sz, j, nf;
    // level of heap node h: the root (h = 1) is level NS
    lvl = NS;
    for (int t = h; t > 1; t /= 2) lvl--;
    sz = 1 << lvl;
    j  = h - (1 << (NS - lvl));
    nf = 0;
    for (int i = 0; i < sz; i++) nf += frozen[j*sz + i];
    if (lvl == 1)                               return NODE_PAIR;
    if (nf == sz)                               return NODE_N0;
    if (nf == 0)                                return NODE_N1;
    if (nf == sz - 1 && !frozen[j*sz + sz - 1]) return NODE_REP;
    if (nf == 1 && frozen[j*sz])                return NODE_SPC;
    return NODE_REG;
  endfunction

  initial begin
    foreach (seen[i]) seen[i] = 0;
    for (int t = 0; t < 300; t++) begin
      if (t % 2 == 0) begin
        int dens;
        dens = $urandom_range(0, 100);
        for (int i = 0; i < N; i++) frozen[i] = ($urandom_range(0, 99) < dens);
      end else begin
        // random concatenation of fast blocks of 4 or 8 bits
        for (int b = 0; b < N; b += 8)
          case ($urandom_range(0, 4))
            0: frozen[b +: 8] = 8'hFF;
            1: frozen[b +: 8] = 8'h00;
            2: frozen[b +: 8] = 8'h7F;   // bit b+7 is information: REP
            3: frozen[b +: 8] = 8'h01;   // only bit b frozen: SPC
            default: frozen[b +: 8] = 8'($urandom);
          endcase
      end
      #1;
      for (int h = 1; h < N; h++) begin
        node_kind_t e;
        e = expect_kind(h);
        checks++;
        seen[e]++;
        if (kind[h] != e) begin
          failures++;
          if (failures < 10) $display("node %0d: got %s expected %s", h, kind[h].name(), e.name());
        end
      end
    end
    for (int k = 0; k < 6; k++) begin
      checks++;
      if (seen[k] == 0) begin failures++; $display("kind %0d never tested", k); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
