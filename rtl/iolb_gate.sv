// iolb_gate: any N-input logic gate protected by Input-Output Logic Based
// (IOLB) correction, built by the general IOLB procedure.
//
// The gate function g is given as a truth table, TRUTH[x] = g(x) for the
// input vector x (bit i of x is input i). The procedure: form the change
// variables of the inputs, Xc = X xor X_delayed, and of the output,
// Yc = Y xor ref; write the error E as a function of X, Xc, Y, Yc; correct
// the output as F = Y xor E. The reduction used here is
//     E = Yc xor ( g(X) xor g(X xor Xc) ),
// the observed output change against the output change the input change
// implies. For NOT and XOR this gives exactly their published truth tables
// (E = Ac xor Bc, E = Ac xor Bc xor Sc); for other gates the published
// procedure leaves the reduction to the designer, and this one is this
// design's choice.
//
// As in the published NOT and XOR circuits, ref is the delayed output of a
// mux that passes Y when E = 0 and NOT Y when E = 1, i.e. the last
// corrected output. Every delay is one D flip-flop on clk.
//
// A fault-injection mux (fault_sel) sits between the gate and the IOLB
// circuit, so y is the possibly faulty gate output.
//
// Timing: y, e and f are combinational from x and fault_sel; the N+1 delay
// flip-flops update on the rising clk edge. Synchronous active-low reset
// loads the fault-free state for x = 0 (reference TRUTH[0]).
module iolb_gate
  import iolb_pkg::*;
#(
  parameter int unsigned      N     = 2,
  parameter logic [2**N-1:0]  TRUTH = 4'b1000   // default: 2-input AND
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [N-1:0]  x,
  input  fault_e        fault_sel,
  output logic          y,      // gate output as seen by the IOLB circuit
  output logic          e,      // error signal
  output logic          f       // corrected output
);

  logic [N-1:0] x_dly, xc;
  logic         y_gate, y_mux, y_dly, yc;
  logic         exp_change;     // output change expected from the input change

  assign y_gate = TRUTH[x];

  fault_inject_mux u_fi (.y_in(y_gate), .sel(fault_sel), .y_out(y));

  assign xc         = x ^ x_dly;
  assign exp_change = TRUTH[x] ^ TRUTH[x ^ xc];
  assign y_mux      = e ? ~y : y;
  assign yc         = y ^ y_dly;
  assign e          = yc ^ exp_change;
  assign f          = y ^ e;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      x_dly <= '0;
      y_dly <= TRUTH[0];
    end else begin
      x_dly <= x;
      y_dly <= y_mux;
    end
  end

endmodule
