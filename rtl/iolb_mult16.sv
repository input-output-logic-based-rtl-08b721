// iolb_mult16: unsigned WIDTH x WIDTH cascaded array multiplier in which
// every logic gate is replaced by its IOLB-protected counterpart (default
// WIDTH = 16, the size the technique is evaluated at).
//
// Structure. WIDTH*WIDTH iolb_and gates form the partial products
// pp[i][j] = a[j] & b[i]. Rows r = 1 .. WIDTH-1 are ripple-carry adders of
// WIDTH cells: cell j adds pp[r][j] to bit j+1 of the previous row's
// (WIDTH+1)-bit result, column 0 being a half adder and the others full
// adders. Bit 0 of each row is a product bit; the last row gives the upper
// WIDTH+1 bits. Each gate corrects its own output from the change of its
// inputs and of its output since the last clock edge, so the array as a
// whole still computes a*b in one clock cycle.
//
// Fault injection. Gates are numbered: partial-product AND (i,j) is
// i*WIDTH + j; gate k (0..4) of adder cell (r,j) is
// WIDTH*WIDTH + ((r-1)*WIDTH + j)*5 + k (a half adder uses k = 0 XOR and
// k = 1 AND only). fault_mode is applied to the gate numbered fault_gate,
// all others run fault-free: a single faulty module at a time, which is the
// condition the technique is built for. Which gate is faulted, and how, may
// change from cycle to cycle.
//
// Sequential logic. The product and the OR of all gate error signals are
// captured in a TMR register (three copies and a majority voter), as the
// technique prescribes TMR for sequential logic. tmr_upset flips bits of the
// copies to emulate an upset there.
//
// Timing: apply a and b; after the next rising clk edge p = a*b and err
// tells whether any gate had to correct its output in that cycle.
// Synchronous active-low reset puts every gate in the fault-free state for
// all-zero inputs.
//
// The array needs no inverter, so the IOLB NOT gate (iolb_not) does not
// occur in it. Only the output register is triplicated: the delay
// flip-flops inside the gates are single, as in the published gate
// circuits, and an upset in one of them is not repaired before reset.
//
// Choices of this design, not of the technique: the array structure and
// gate decomposition, the gate numbering and single-fault addressing,
// unregistered inputs, and the error flag in the output register.
module iolb_mult16
  import iolb_pkg::*;
#(
  parameter  int unsigned WIDTH     = 16,
  localparam int unsigned NUM_GATES = WIDTH*WIDTH + (WIDTH-1)*WIDTH*5,
  localparam int unsigned GATE_IDW  = $clog2(NUM_GATES),
  localparam int unsigned PW        = 2*WIDTH
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic [WIDTH-1:0]      a,
  input  logic [WIDTH-1:0]      b,
  input  logic [GATE_IDW-1:0]   fault_gate,
  input  fault_e                fault_mode,
  input  logic [2:0][PW:0]      tmr_upset,
  output logic [PW-1:0]         p,
  output logic                  err
);

  localparam int unsigned PP_GATES = WIDTH*WIDTH;

  // Fault select of the gate numbered id.
  function automatic fault_e fsel(input logic [GATE_IDW-1:0] sel_gate,
                                  input fault_e mode, input logic [GATE_IDW-1:0] id);
    return (sel_gate == id) ? mode : FI_NONE;
  endfunction

  logic [WIDTH-1:0]   pp  [WIDTH];        // corrected partial products, pp[i][j]
  logic [WIDTH:0]     row [WIDTH];        // row[r]: result of adder row r; row[0] = {0, pp[0]}
  logic [NUM_GATES-1:0] e_all;            // error signal of every gate, by gate number
  logic [PW-1:0]      prod;

  // Partial products.
  for (genvar i = 0; i < WIDTH; i++) begin : g_ppi
    for (genvar j = 0; j < WIDTH; j++) begin : g_ppj
      localparam int unsigned ID = i*WIDTH + j;
      iolb_and u_and (
        .clk, .rst_n,
        .a(a[j]), .b(b[i]),
        .fault_sel(fsel(fault_gate, fault_mode, GATE_IDW'(ID))),
        .y(), .e(e_all[ID]), .f(pp[i][j])
      );
    end
  end

  assign row[0] = {1'b0, pp[0]};

  // Adder rows.
  for (genvar r = 1; r < WIDTH; r++) begin : g_row
    logic [WIDTH-1:0] c;   // carry out of each cell
    logic [WIDTH-1:0] s;
    for (genvar j = 0; j < WIDTH; j++) begin : g_cell
      localparam int unsigned BASE = PP_GATES + ((r-1)*WIDTH + j)*5;
      if (j == 0) begin : g_ha
        fault_e fs [2];
        for (genvar k = 0; k < 2; k++) begin : g_fs
          assign fs[k] = fsel(fault_gate, fault_mode, GATE_IDW'(BASE + k));
        end
        iolb_half_adder u_ha (
          .clk, .rst_n,
          .a(pp[r][j]), .b(row[r-1][j+1]),
          .fault_sel(fs),
          .s(s[j]), .c(c[j]), .e(e_all[BASE +: 2])
        );
        assign e_all[BASE+2 +: 3] = '0;   // gate numbers left unused by a half adder
      end else begin : g_fa
        fault_e fs [5];
        for (genvar k = 0; k < 5; k++) begin : g_fs
          assign fs[k] = fsel(fault_gate, fault_mode, GATE_IDW'(BASE + k));
        end
        iolb_full_adder u_fa (
          .clk, .rst_n,
          .a(pp[r][j]), .b(row[r-1][j+1]), .cin(c[j-1]),
          .fault_sel(fs),
          .s(s[j]), .cout(c[j]), .e(e_all[BASE +: 5])
        );
      end
    end
    assign row[r] = {c[WIDTH-1], s};
  end

  // Product bits: bit 0 of every row, then the upper bits of the last row.
  always_comb begin
    for (int r = 0; r < WIDTH; r++) prod[r] = row[r][0];
    prod[PW-1:WIDTH] = row[WIDTH-1][WIDTH:1];
  end

  // Output register, protected by TMR.
  logic [PW:0] q;
  tmr_reg #(.W(PW+1)) u_out (
    .clk, .rst_n,
    .d({|e_all, prod}),
    .upset(tmr_upset),
    .q(q)
  );

  assign p   = q[PW-1:0];
  assign err = q[PW];

endmodule
