// iolb_or_tb: self-checking testbench of the IOLB-protected OR gate.
//
// Each cycle new random inputs and a random fault on the gate output are
// applied (about half the cycles fault-free). Before the clock edge the
// testbench checks:
//   - the raw output against the intended fault of the true gate value,
//   - the corrected output f against the true gate value,
//   - the error e against the general rule: E is set when the observed output change differs from the change the input change implies, evaluated from the change variables
//     the testbench keeps itself (input change since the last cycle, raw
//     output against the last correct output).
// Long runs of a stuck fault and runs of no input change are included so
// that every row of the table is visited; each row must be hit.
module iolb_or_tb;
  import iolb_pkg::*;

  logic   clk = 1'b0, rst_n = 1'b0;
  logic   a = 1'b0, b = 1'b0;
  fault_e fault_sel = FI_NONE;
  logic   y, e, f;
  int     checks = 0, failures = 0;
  int     row_hits [8];

  iolb_or dut (.clk, .rst_n, .a, .b, .fault_sel, .y(y), .e, .f);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic gate(input logic x1, input logic x2);
    return x1 | x2;
  endfunction

  task automatic check(input string what, input logic got, input logic exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s t=%0t a=%0b b=%0b sel=%0d got=%0b exp=%0b",
                                  what, $time, a, b, fault_sel, got, exp);
    end
  endtask

  initial begin
    logic a_prev, b_prev, f_prev, y_exp, ac, bc, yc, e_exp;
    int   idx;
    a_prev = 1'b0; b_prev = 1'b0; f_prev = 1'b0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 4000; n++) begin
      // stimulus: sometimes hold the inputs, sometimes hold a fault for a while
      if ($urandom_range(0, 3) != 0) begin
        a = 1'($urandom);
        b = 1'($urandom);
      end
      if ((n % 50) < 20) fault_sel = FI_NONE;
      else if ((n % 50) < 30) fault_sel = FI_SA0;
      else if ((n % 50) < 40) fault_sel = FI_SA1;
      else fault_sel = fault_e'($urandom_range(0, 3));
      #1;
      case (fault_sel)
        FI_NONE: y_exp = gate(a, b);
        FI_SA0:  y_exp = 1'b0;
        FI_SA1:  y_exp = 1'b1;
        default: y_exp = ~gate(a, b);
      endcase
      ac = a ^ a_prev;
      bc = b ^ b_prev;
      yc = y_exp ^ f_prev;
      // rows indexed by (Ac, Bc, Yc); E = Yc xor (gate(now) xor gate(before))
      idx = {ac, bc, yc};
      e_exp = yc ^ gate(a, b) ^ gate(a_prev, b_prev);
      row_hits[idx]++;
      check("raw", y, y_exp);
      check("e", e, e_exp);
      check("f", f, gate(a, b));
      a_prev = a; b_prev = b; f_prev = gate(a, b);
      @(negedge clk);
    end
    // reset returns the gate to its fault-free starting state
    rst_n = 1'b0;
    @(negedge clk);
    rst_n = 1'b1;
    a = 1'b0; b = 1'b0; fault_sel = FI_FLIP;
    #1;
    check("e after reset", e, 1'b1);
    check("f after reset", f, gate(1'b0, 1'b0));
    foreach (row_hits[r]) begin
      checks++;
      if (row_hits[r] == 0) begin
        failures++;
        $display("FAIL table row %0d never exercised", r);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
