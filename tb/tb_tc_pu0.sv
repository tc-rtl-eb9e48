// tb_tc_pu0: self-checking test of the stage-0 processing unit.
//
// Sweeps every pair of inner LLRs in -15..15 and every frozen pattern of
// the two bits, and checks u1, u2, the REP partial sum, the single parity
// check bit and the select signal (registered one cycle later) against
// integer arithmetic: u1 = sign XOR (0 if frozen), u2 = sign of the sum or
// difference chosen by u1 (0 if frozen).
module tb_tc_pu0;
  import tc_ref_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  logic signed [4:0] llr1, llr2;
  logic frz1, frz2, u1, u2, rep_ps, spc_bit, ss;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  tc_pu0 #(.Q(5)) dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("%s: a=%0d b=%0d frz=%0d%0d got %0d expected %0d",
                                  what, llr1, llr2, frz1, frz2, got, exp);
    end
  endtask

  initial begin
    llr1 = 0; llr2 = 0; frz1 = 0; frz2 = 0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int a = -15; a <= 15; a++)
      for (int b = -15; b <= 15; b++)
        for (int fz = 0; fz < 4; fz++) begin
          bit e1, e2; int g;
          llr1 = 5'(a); llr2 = 5'(b); {frz1, frz2} = 2'(fz);
          e1 = frz1 ? 0 : ((a < 0) ^ (b < 0));
          g  = e1 ? sat(b - a) : sat(b + a);
          e2 = frz2 ? 0 : (g < 0);
          #1;
          check("u1", u1, e1);
          check("u2", u2, e2);
          check("rep", rep_ps, sat(a + b) < 0);
          check("spc", spc_bit, (a < 0) ^ (b < 0));
          @(negedge clk);
          check("ss", ss, iabs(b) < iabs(a));
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
