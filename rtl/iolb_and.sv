// iolb_and: two-input AND gate protected by Input-Output Logic Based (IOLB)
// correction.
//
// The IOLB AND circuit is derived with the general IOLB procedure, so this
// module is the general N-input IOLB gate (iolb_gate) with N = 2 and the
// AND truth table (4'b1000, index {b, a}). Its error rule is
//     E = Yc xor ( AND(A,B) xor AND(A_delayed,B_delayed) ),
// the observed output change against the change the input change implies;
// F = Y xor E. The published work reports AND circuits made by this
// procedure without printing them, so the reduction is this design's
// choice (see iolb_gate).
//
// A fault-injection mux (fault_sel) sits on the gate output inside
// iolb_gate. Timing: y, e and f are combinational from a, b and fault_sel;
// three delay flip-flops update on the rising clk edge. Synchronous
// active-low reset loads the fault-free state A=B=0, F=0.
module iolb_and
  import iolb_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  input  logic   a,
  input  logic   b,
  input  fault_e fault_sel,
  output logic   y,      // gate output as seen by the IOLB circuit
  output logic   e,      // error signal
  output logic   f       // corrected output
);

  iolb_gate #(.N(2), .TRUTH(4'b1000)) u_gate (
    .clk, .rst_n,
    .x({b, a}),
    .fault_sel,
    .y, .e, .f
  );

endmodule
