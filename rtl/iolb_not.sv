// iolb_not: NOT gate protected by Input-Output Logic Based (IOLB) correction.
//
// Idea: a NOT gate's output must change exactly when its input changes. The
// circuit compares the change of the input, Ac = A xor A_delayed, with the
// change of the output, Bc = B xor ref, and raises the error E = Ac xor Bc
// when they disagree (truth table: 00->0, 01->1, 10->1, 11->0). The corrected
// output is F = B xor E.
//
// The reference used for Bc is the delayed value of a mux that passes B when
// E = 0 and NOT B when E = 1, so the delay always holds the last corrected
// output F, not the possibly faulty B. This structure (two delays, the
// E-controlled mux, four XORs) follows the published circuit. Each delay is
// a D flip-flop here, so "change" means change since the last clock edge.
//
// A fault-injection mux (fault_sel) sits between the NOT gate and the IOLB
// circuit, so the IOLB part sees the faulty B.
//
// Timing: b, e and f are combinational from a and fault_sel; the two delay
// flip-flops update on the rising clk edge. Synchronous active-low reset
// loads the fault-free state A=0, F=1 (this design's choice).
module iolb_not
  import iolb_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  input  logic   a,
  input  fault_e fault_sel,
  output logic   b,      // NOT gate output as seen by the IOLB circuit
  output logic   e,      // error signal
  output logic   f       // corrected output
);

  logic b_gate;          // fault-free NOT gate output
  logic a_dly;           // delay on the input
  logic b_mux, b_dly;    // E-selected value of B and its delay
  logic ac, bc;          // change variables

  assign b_gate = ~a;

  fault_inject_mux u_fi (.y_in(b_gate), .sel(fault_sel), .y_out(b));

  assign b_mux = e ? ~b : b;
  assign ac    = a ^ a_dly;
  assign bc    = b ^ b_dly;
  assign e     = ac ^ bc;
  assign f     = b ^ e;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      a_dly <= 1'b0;
      b_dly <= 1'b1;
    end else begin
      a_dly <= a;
      b_dly <= b_mux;
    end
  end

endmodule
