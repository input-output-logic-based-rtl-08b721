// iolb_xor: two-input XOR gate protected by Input-Output Logic Based (IOLB)
// correction.
//
// Idea: the output of an XOR must change exactly when an odd number of its
// inputs change. With the change variables Ac = A xor A_delayed,
// Bc = B xor B_delayed and Sc = S xor ref, the error is E = Ac xor Bc xor Sc
// (the eight-row truth table of the technique reduces to this parity), and
// the corrected output is F = S xor E.
//
// As in iolb_not, the reference for Sc is the delayed output of a mux that
// passes S when E = 0 and NOT S when E = 1, i.e. the last corrected output.
// Three delays, the mux and five XORs follow the published circuit; each
// delay is a D flip-flop here.
//
// A fault-injection mux (fault_sel) sits between the XOR gate and the IOLB
// circuit.
//
// Timing: s, e and f are combinational from a, b and fault_sel; the delays
// update on the rising clk edge. Synchronous active-low reset loads the
// fault-free state A=B=0, F=0 (this design's choice).
module iolb_xor
  import iolb_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  input  logic   a,
  input  logic   b,
  input  fault_e fault_sel,
  output logic   s,      // XOR gate output as seen by the IOLB circuit
  output logic   e,      // error signal
  output logic   f       // corrected output
);

  logic s_gate;
  logic a_dly, b_dly;
  logic s_mux, s_dly;
  logic ac, bc, sc;

  assign s_gate = a ^ b;

  fault_inject_mux u_fi (.y_in(s_gate), .sel(fault_sel), .y_out(s));

  assign s_mux = e ? ~s : s;
  assign ac    = a ^ a_dly;
  assign bc    = b ^ b_dly;
  assign sc    = s ^ s_dly;
  assign e     = ac ^ bc ^ sc;
  assign f     = s ^ e;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      a_dly <= 1'b0;
      b_dly <= 1'b0;
      s_dly <= 1'b0;
    end else begin
      a_dly <= a;
      b_dly <= b;
      s_dly <= s_mux;
    end
  end

endmodule
