// tb_tc_ptu: truth-table test of the parity transmit unit.
//
// Applies all four input combinations and checks O1 = PCB & ~SS and
// O2 = PCB & SS.
module tb_tc_ptu;
  logic pcb, ss, o1, o2;
  int checks = 0, failures = 0;

  tc_ptu dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 4; i++) begin
      {pcb, ss} = 2'(i);
      #1;
      checks++;
      if (o1 != (pcb && !ss)) begin failures++; $display("O1 wrong for PCB=%0d SS=%0d", pcb, ss); end
      checks++;
      if (o2 != (pcb && ss))  begin failures++; $display("O2 wrong for PCB=%0d SS=%0d", pcb, ss); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
