// tb_tc_pu: self-checking test of the processing unit.
//
// Sweeps every pair of 5-bit inner LLRs in -15..15 and checks the f path,
// the direct sum (accumulation), the pre-computed g path (sum and
// difference captured with pre_en, then the inputs changed and both
// partial-sum values read back a cycle later), the select-signal register
// (load with mode select 3, hold without it) and the two outputs towards
// the partial-sum generator, against integer arithmetic in tc_ref_pkg.
module tb_tc_pu;
  import tc_ref_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  logic signed [4:0] llr1, llr2, llr_out;
  logic pre_en, ms1, ms2, ms3, psum, pcb, ss, ps_l, ps_r;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  tc_pu #(.Q(5)) dut (.*);

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
      if (failures < 20) $display("%s: a=%0d b=%0d got %0d expected %0d", what, llr1, llr2, got, exp);
    end
  endtask

  initial begin
    {pre_en, ms1, ms2, ms3, psum, pcb} = '0;
    llr1 = 0; llr2 = 0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int a = -15; a <= 15; a++)
      for (int b = -15; b <= 15; b++) begin
        bit c;
        llr1 = 5'(a); llr2 = 5'(b);
        c = iabs(b) < iabs(a);
        // f / minimum
        ms2 = 0; ms1 = 0; pre_en = 1; ms3 = 1; pcb = 0;
        #1 check("f", llr_out, f_fn(a, b));
        check("ps_l", ps_l, (a < 0) ^ (b < 0));
        // accumulation (direct sum)
        ms2 = 1; ms1 = 1;
        #1 check("acc", llr_out, sat(a + b));
        @(negedge clk);                 // sum/diff and select signal captured
        pre_en = 0; ms3 = 0;
        check("ss", ss, c);
        // change the inputs: g must come from the registers
        llr1 = 5'(b); llr2 = 5'(a);
        ms1 = 0; ms2 = 1; psum = 0;
        #1 check("g sum", llr_out, sat(a + b));
        psum = 1;
        #1 check("g diff", llr_out, sat(b - a));
        @(negedge clk);                 // select signal must hold
        check("ss hold", ss, c);
        // parity bit towards the PSG, with the held select signal
        llr1 = 5'(a); llr2 = 5'(b);
        pcb = 1;
        #1 check("ps_l pcb", ps_l, (a < 0) ^ (b < 0) ^ 1);
        check("ps_r pcb", ps_r, (b < 0) ^ c);
        pcb = 0;
        #1 check("ps_r", ps_r, (b < 0));
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
