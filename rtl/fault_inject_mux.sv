// fault_inject_mux: 4-to-1 multiplexer that emulates a fault on one gate output.
//
// The true gate output y_in, a constant 0, a constant 1 and the inverted
// output are the four mux inputs; sel (an iolb_pkg::fault_e) picks one of
// them. Purely combinational.
//
// Using 4x1 multiplexers for stuck-at-0 / stuck-at-1 emulation follows the
// evaluation method of the technique; what the fourth input carries
// (inversion) and the select encoding are this design's choice.
module fault_inject_mux
  import iolb_pkg::*;
(
  input  logic   y_in,
  input  fault_e sel,
  output logic   y_out
);

  always_comb begin
    unique case (sel)
      FI_NONE: y_out = y_in;
      FI_SA0:  y_out = 1'b0;
      FI_SA1:  y_out = 1'b1;
      FI_FLIP: y_out = ~y_in;
    endcase
  end

endmodule
