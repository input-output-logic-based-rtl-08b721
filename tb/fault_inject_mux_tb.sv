// fault_inject_mux_tb: exhaustive check of the fault-injection multiplexer.
// Every (y_in, sel) pair is applied and y_out compared with the intended
// fault: pass-through, stuck-at-0, stuck-at-1, inversion.
module fault_inject_mux_tb;
  import iolb_pkg::*;

  logic   y_in, y_out;
  fault_e sel;
  int     checks = 0, failures = 0;

  fault_inject_mux dut (.y_in, .sel, .y_out);

  initial begin : watchdog
    #10000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic exp;
    for (int s = 0; s < 4; s++) begin
      for (int v = 0; v < 2; v++) begin
        y_in = v[0];
        sel  = fault_e'(s);
        #1;
        case (s)
          0: exp = v[0];
          1: exp = 1'b0;
          2: exp = 1'b1;
          default: exp = ~v[0];
        endcase
        checks++;
        if (y_out !== exp) begin
          failures++;
          $display("FAIL sel=%0d y_in=%0b y_out=%0b exp=%0b", s, y_in, y_out, exp);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
