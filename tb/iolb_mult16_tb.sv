// iolb_mult16_tb: end-to-end testbench of the IOLB multiplier at its default
// size (16 x 16, 1411 protected gates, numbered within 0..1455).
//
// Phase 1 runs fault-free products, corner operands included. Phase 2 walks
// over every gate and every fault mode (stuck-at-0, stuck-at-1, inversion),
// holding each fault for several cycles of random operands, as a permanent
// fault would be held. Throughout, single upsets are flipped into one copy of
// the TMR output register now and then.
//
// Each cycle the testbench checks, one clock after the operands:
//   - p equals a*b (the fault is corrected),
//   - err is 1 exactly when the faulted gate's output differed from its true
//     value. The true value of every gate is computed by a separate
//     behavioural model of the array below, using the gate numbering of the
//     multiplier.
// It counts the mechanisms of the design and fails if any never happened:
// stuck-at-0, stuck-at-1 and inverted gate outputs that were detected and
// corrected, faults on AND, XOR and OR gates, faults that did not disturb
// the output (no error), and TMR upsets masked by the voter.
module iolb_mult16_tb;
  import iolb_pkg::*;

  localparam int unsigned W         = 16;
  localparam int unsigned NUM_GATES = W*W + (W-1)*W*5;
  localparam int unsigned IDW       = $clog2(NUM_GATES);
  localparam int unsigned HOLD      = 4;     // cycles each fault is held

  logic                 clk = 1'b0, rst_n = 1'b0;
  logic [W-1:0]         a = '0, b = '0;
  logic [IDW-1:0]       fault_gate = '0;
  fault_e               fault_mode = FI_NONE;
  logic [2:0][2*W:0]    tmr_upset = '0;
  logic [2*W-1:0]       p;
  logic                 err;

  int checks = 0, failures = 0;
  int n_clean = 0, n_sa0 = 0, n_sa1 = 0, n_flip = 0, n_silent = 0;
  int n_and = 0, n_xor = 0, n_or = 0, n_tmr = 0;

  iolb_mult16 dut (.clk, .rst_n, .a, .b, .fault_gate, .fault_mode, .tmr_upset, .p, .err);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (40000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // True value of every gate for operands x, y, by gate number, and the kind
  // of gate (0 AND, 1 XOR, 2 OR).
  logic gv   [NUM_GATES];
  int   kind [NUM_GATES];

  task automatic model(input logic [W-1:0] x, input logic [W-1:0] y);
    logic [W:0] prev, cur;
    logic       c, xx, s, g, t;
    int         base;
    for (int i = 0; i < W; i++)
      for (int j = 0; j < W; j++) begin
        gv[i*W+j] = x[j] & y[i];
        kind[i*W+j] = 0;
      end
    for (int j = 0; j < W; j++) prev[j] = x[j] & y[0];
    prev[W] = 1'b0;
    for (int r = 1; r < W; r++) begin
      c = 1'b0;
      for (int j = 0; j < W; j++) begin
        base = W*W + ((r-1)*W + j)*5;
        if (j == 0) begin
          s = (x[j] & y[r]) ^ prev[j+1];
          g = (x[j] & y[r]) & prev[j+1];
          gv[base] = s;    kind[base] = 1;
          gv[base+1] = g;  kind[base+1] = 0;
          for (int k = 2; k < 5; k++) begin gv[base+k] = 1'b0; kind[base+k] = -1; end
          cur[j] = s; c = g;
        end else begin
          xx = (x[j] & y[r]) ^ prev[j+1];
          s  = xx ^ c;
          g  = (x[j] & y[r]) & prev[j+1];
          t  = xx & c;
          gv[base] = xx;   kind[base] = 1;
          gv[base+1] = s;  kind[base+1] = 1;
          gv[base+2] = g;  kind[base+2] = 0;
          gv[base+3] = t;  kind[base+3] = 0;
          gv[base+4] = g | t; kind[base+4] = 2;
          cur[j] = s; c = g | t;
        end
      end
      cur[W] = c;
      prev = cur;
    end
  endtask

  // Apply one cycle of operands and fault; check the result one clock later.
  task automatic cycle(input logic [W-1:0] x, input logic [W-1:0] y,
                       input int unsigned gid, input fault_e mode);
    logic exp_err, faulted;
    logic [2*W-1:0] exp_p;
    int k;
    a = x; b = y; fault_gate = IDW'(gid); fault_mode = mode;
    tmr_upset = '0;
    if ($urandom_range(0, 7) == 0) begin
      k = $urandom_range(0, 2);
      tmr_upset[k] = {1'($urandom), $urandom};
      if (tmr_upset[k] != '0) n_tmr++;
    end
    model(x, y);
    faulted = 1'b0;
    if (gid < NUM_GATES && kind[gid] >= 0) begin
      case (mode)
        FI_SA0:  faulted = gv[gid] != 1'b0;
        FI_SA1:  faulted = gv[gid] != 1'b1;
        FI_FLIP: faulted = 1'b1;
        default: faulted = 1'b0;
      endcase
    end
    exp_err = faulted;
    exp_p   = (2*W)'(x) * (2*W)'(y);
    @(negedge clk);
    checks++;
    if (p !== exp_p) begin
      failures++;
      if (failures < 20) $display("FAIL p t=%0t a=%h b=%h gate=%0d mode=%0d p=%h exp=%h",
                                  $time, x, y, gid, mode, p, exp_p);
    end
    checks++;
    if (err !== exp_err) begin
      failures++;
      if (failures < 20) $display("FAIL err t=%0t a=%h b=%h gate=%0d mode=%0d err=%0b exp=%0b",
                                  $time, x, y, gid, mode, err, exp_err);
    end
    if (mode == FI_NONE) n_clean++;
    else if (!faulted) n_silent++;
    else begin
      case (mode)
        FI_SA0:  n_sa0++;
        FI_SA1:  n_sa1++;
        default: n_flip++;
      endcase
      case (kind[gid])
        0: n_and++;
        1: n_xor++;
        default: n_or++;
      endcase
    end
  endtask

  task automatic need(input string what, input int count);
    checks++;
    if (count == 0) begin
      failures++;
      $display("FAIL mechanism never exercised: %s", what);
    end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    // phase 1: fault-free, corner operands then random ones
    cycle('0, '0, 0, FI_NONE);
    cycle('1, '1, 0, FI_NONE);
    cycle('1, 16'h0001, 0, FI_NONE);
    cycle(16'h8000, 16'h8000, 0, FI_NONE);
    cycle('1, '0, 0, FI_NONE);
    for (int n = 0; n < 200; n++) cycle(16'($urandom), 16'($urandom), 0, FI_NONE);
    // phase 2: every gate, every fault mode, held for HOLD cycles
    for (int g = 0; g < NUM_GATES; g++) begin
      if (kind[g] < 0) continue;
      for (int m = 1; m < 4; m++)
        for (int h = 0; h < HOLD; h++)
          cycle(16'($urandom), 16'($urandom), g, fault_e'(m));
    end
    // fault removed again: clean operation resumes
    for (int n = 0; n < 20; n++) cycle(16'($urandom), 16'($urandom), 0, FI_NONE);

    $display("fault-free cycles %0d, detected+corrected: stuck-at-0 %0d, stuck-at-1 %0d, inverted %0d",
             n_clean, n_sa0, n_sa1, n_flip);
    $display("corrected faults on AND %0d, XOR %0d, OR %0d; faults with no effect %0d; TMR upsets %0d",
             n_and, n_xor, n_or, n_silent, n_tmr);
    need("fault-free product", n_clean);
    need("stuck-at-0 corrected", n_sa0);
    need("stuck-at-1 corrected", n_sa1);
    need("inverted output corrected", n_flip);
    need("fault on an AND gate", n_and);
    need("fault on an XOR gate", n_xor);
    need("fault on an OR gate", n_or);
    need("fault without effect", n_silent);
    need("TMR upset masked", n_tmr);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
