// iolb_half_adder: half adder made of IOLB-protected gates, a building block
// of the cascaded multiplier.
//
// s = a xor b (iolb_xor), c = a and b (iolb_and). Each gate has its own
// fault-injection select: fault_sel[0] for the XOR, fault_sel[1] for the
// AND; e returns the two error signals in the same order. s and c are the
// corrected outputs F of the gates. The decomposition into gates is this
// design's choice. Timing as for the gates: combinational outputs, delay
// flip-flops on the rising clk edge.
module iolb_half_adder
  import iolb_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        a,
  input  logic        b,
  input  fault_e      fault_sel [2],
  output logic        s,
  output logic        c,
  output logic [1:0]  e
);

  iolb_xor u_xor (.clk, .rst_n, .a, .b, .fault_sel(fault_sel[0]),
                  .s(), .e(e[0]), .f(s));
  iolb_and u_and (.clk, .rst_n, .a, .b, .fault_sel(fault_sel[1]),
                  .y(), .e(e[1]), .f(c));

endmodule
