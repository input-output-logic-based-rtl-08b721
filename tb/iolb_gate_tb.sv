// iolb_gate_tb: self-checking testbench of the general N-input IOLB gate.
//
// Five instances share one stimulus:
//   d0  N=3 majority          d1  N=3 parity         d2  N=3 arbitrary table 8'hA7
//   d3  N=1 NOT (checked against Table 1: E = f(Ac, Bc))
//   d4  N=2 XOR (checked against Table 2: E = f(Ac, Bc, Sc))
// For every previous input vector, every new input vector and every fault
// mode, one fault-free cycle sets the previous state and the next cycle
// applies the new inputs with the fault. The setup cycle is checked too
// (no error, correct output: the fault left no trace). The testbench then checks the raw
// output against the intended fault, the corrected output against the gate
// function, and E: for d0..d2 against "observed output change differs from
// the change the input change implies", for d3/d4 against the published
// truth tables, looked up from the change variables the testbench keeps.
module iolb_gate_tb;
  import iolb_pkg::*;

  localparam int unsigned ND = 5;
  localparam logic [7:0] T_MAJ = 8'b1110_1000;
  localparam logic [7:0] T_PAR = 8'b1001_0110;
  localparam logic [7:0] T_ARB = 8'hA7;

  logic        clk = 1'b0, rst_n = 1'b0;
  logic [2:0]  x = '0;
  fault_e      fsel [ND];
  logic [ND-1:0] y, e, f;
  int checks = 0, failures = 0;

  iolb_gate #(.N(3), .TRUTH(T_MAJ)) d0 (.clk, .rst_n, .x(x),      .fault_sel(fsel[0]), .y(y[0]), .e(e[0]), .f(f[0]));
  iolb_gate #(.N(3), .TRUTH(T_PAR)) d1 (.clk, .rst_n, .x(x),      .fault_sel(fsel[1]), .y(y[1]), .e(e[1]), .f(f[1]));
  iolb_gate #(.N(3), .TRUTH(T_ARB)) d2 (.clk, .rst_n, .x(x),      .fault_sel(fsel[2]), .y(y[2]), .e(e[2]), .f(f[2]));
  iolb_gate #(.N(1), .TRUTH(2'b01)) d3 (.clk, .rst_n, .x(x[0]),   .fault_sel(fsel[3]), .y(y[3]), .e(e[3]), .f(f[3]));
  iolb_gate #(.N(2), .TRUTH(4'b0110)) d4 (.clk, .rst_n, .x(x[1:0]), .fault_sel(fsel[4]), .y(y[4]), .e(e[4]), .f(f[4]));

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // gate function of instance k
  function automatic logic g(input int k, input logic [2:0] v);
    case (k)
      0: return T_MAJ[v];
      1: return T_PAR[v];
      2: return T_ARB[v];
      3: return ~v[0];
      default: return v[0] ^ v[1];
    endcase
  endfunction

  task automatic check(input string what, input int k, input logic got, input logic exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s d%0d t=%0t x=%b got=%0b exp=%0b", what, k, $time, x, got, exp);
    end
  endtask

  initial begin
    logic [2:0] xp, xc;
    logic       yexp, yc, eexp;
    foreach (fsel[k]) fsel[k] = FI_NONE;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int p = 0; p < 8; p++)
      for (int n = 0; n < 8; n++)
        for (int m = 0; m < 4; m++) begin
          // set the previous state, fault-free
          x = 3'(p);
          foreach (fsel[k]) fsel[k] = FI_NONE;
          #1;
          // the fault of the cycle before must have left no trace
          for (int k = 0; k < ND; k++) begin
            check("e (setup)", k, e[k], 1'b0);
            check("f (setup)", k, f[k], g(k, x));
          end
          @(negedge clk);
          // new inputs, faulted
          x = 3'(n);
          foreach (fsel[k]) fsel[k] = fault_e'(m);
          #1;
          xp = 3'(p);
          xc = x ^ xp;
          for (int k = 0; k < ND; k++) begin
            case (fault_e'(m))
              FI_NONE: yexp = g(k, x);
              FI_SA0:  yexp = 1'b0;
              FI_SA1:  yexp = 1'b1;
              default: yexp = ~g(k, x);
            endcase
            yc = yexp ^ g(k, xp);         // reference holds the last correct output
            case (k)
              3: eexp = 1'((4'b0110 >> {xc[0], yc}) & 1);             // Table 1 (Ac, Bc)
              4: eexp = 1'((8'b1001_0110 >> {xc[0], xc[1], yc}) & 1); // Table 2 (Ac, Bc, Sc)
              default: eexp = yc ^ g(k, x) ^ g(k, xp);
            endcase
            check("y", k, y[k], yexp);
            check("e", k, e[k], eexp);
            check("f", k, f[k], g(k, x));
          end
          @(negedge clk);
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
