// tc_ptu: parity transmit unit.
//
// Part of the backward path that carries the parity check bit (PCB) of a
// single-parity-check node from the stage-0 unit towards the input stage.
// Each PTU sits behind one PU, and its select signal (SS) is the comparator
// result that PU registered while the tree searched for the least reliable
// LLR: SS = 1 means the PU's second input held the smaller magnitude.  The
// bit therefore goes to the PU that fed the smaller input and a 0 goes to
// the other one.  O1 = PCB & ~SS, O2 = PCB & SS: two AND gates and an
// inverter, as the design specifies.  Purely combinational.
module tc_ptu (
  input  logic pcb,  // parity check bit (or 0)
  input  logic ss,   // select signal from the PU's comparator register
  output logic o1,   // towards the PU feeding input 1
  output logic o2    // towards the PU feeding input 2
);
  assign o1 = pcb & ~ss;
  assign o2 = pcb &  ss;
endmodule
