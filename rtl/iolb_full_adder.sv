// iolb_full_adder: full adder made of five IOLB-protected gates, a building
// block of the cascaded multiplier.
//
//   gate 0  iolb_xor  x   = a xor b
//   gate 1  iolb_xor  s   = x xor cin
//   gate 2  iolb_and  g   = a and b
//   gate 3  iolb_and  t   = x and cin
//   gate 4  iolb_or   cout = g or t
//
// Every gate reads the corrected outputs F of the gates before it, so a
// fault corrected in one gate does not propagate. fault_sel[k] and e[k]
// belong to gate k. The decomposition is this design's choice (the usual
// two-XOR, two-AND, one-OR full adder). Timing: combinational outputs, delay
// flip-flops of the gates on the rising clk edge.
module iolb_full_adder
  import iolb_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        a,
  input  logic        b,
  input  logic        cin,
  input  fault_e      fault_sel [5],
  output logic        s,
  output logic        cout,
  output logic [4:0]  e
);

  logic x, g, t;

  iolb_xor u_x (.clk, .rst_n, .a,       .b,        .fault_sel(fault_sel[0]), .s(), .e(e[0]), .f(x));
  iolb_xor u_s (.clk, .rst_n, .a(x),    .b(cin),   .fault_sel(fault_sel[1]), .s(), .e(e[1]), .f(s));
  iolb_and u_g (.clk, .rst_n, .a,       .b,        .fault_sel(fault_sel[2]), .y(), .e(e[2]), .f(g));
  iolb_and u_t (.clk, .rst_n, .a(x),    .b(cin),   .fault_sel(fault_sel[3]), .y(), .e(e[3]), .f(t));
  iolb_or  u_c (.clk, .rst_n, .a(g),    .b(t),     .fault_sel(fault_sel[4]), .y(), .e(e[4]), .f(cout));

endmodule
