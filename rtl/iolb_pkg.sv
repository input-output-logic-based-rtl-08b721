// iolb_pkg: types shared by the Input-Output Logic Based (IOLB) gates and the
// multiplier built from them.
//
// fault_e encodes the select lines of the 4-to-1 fault-injection multiplexer
// that sits on every protected gate output. The stuck-at-0 and stuck-at-1
// modes are the faults the technique is evaluated with; the inverted mode
// (a transient upset of the gate output) and the encoding itself are this
// design's choice.
package iolb_pkg;

  typedef enum logic [1:0] {
    FI_NONE = 2'd0,  // gate output passed through
    FI_SA0  = 2'd1,  // stuck-at-0
    FI_SA1  = 2'd2,  // stuck-at-1
    FI_FLIP = 2'd3   // inverted
  } fault_e;

endpackage
