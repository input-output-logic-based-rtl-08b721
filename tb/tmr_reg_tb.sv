// tmr_reg_tb: self-checking testbench of the TMR register at its default
// width. Random data is written every cycle while random bits of one copy
// are flipped (single upset: q must equal d), and now and then the same bit
// is flipped in two copies (q must follow the two-copy majority, i.e. that
// bit is wrong). Checks q one cycle after d; also checks reset.
module tmr_reg_tb;
  localparam int unsigned W = 32;

  logic             clk = 1'b0, rst_n = 1'b0;
  logic [W-1:0]     d = '0, q;
  logic [2:0][W-1:0] upset = '0;
  int checks = 0, failures = 0;
  int single_upsets = 0, double_upsets = 0;

  tmr_reg #(.W(W)) dut (.clk, .rst_n, .d, .upset, .q);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input string what, input logic [W-1:0] got, input logic [W-1:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s t=%0t got=%h exp=%h", what, $time, got, exp);
    end
  endtask

  initial begin
    logic [W-1:0] exp_q, m;
    int k, k2;
    repeat (2) @(negedge clk);
    check("reset", q, '0);
    rst_n = 1'b1;
    for (int n = 0; n < 2000; n++) begin
      d = {$urandom, $urandom};
      upset = '0;
      m = {$urandom, $urandom};
      k = $urandom_range(0, 2);
      exp_q = d;
      case ($urandom_range(0, 3))
        0: ;                                   // no upset
        1, 2: begin upset[k] = m; single_upsets++; end
        default: begin                          // same bits upset in two copies
          k2 = (k + 1) % 3;
          upset[k] = m; upset[k2] = m;
          exp_q = d ^ m;
          double_upsets++;
        end
      endcase
      @(negedge clk);
      check("q", q, exp_q);
    end
    checks++;
    if (single_upsets == 0 || double_upsets == 0) failures++;
    $display("single upsets masked: %0d, double upsets passed through: %0d", single_upsets, double_upsets);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
