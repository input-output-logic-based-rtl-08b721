// tmr_reg: register protected by triple modular redundancy.
//
// The IOLB technique protects combinational gates only; sequential logic is
// to be protected by TMR. Every bit is stored in three flip-flops and read
// through a 2-of-3 majority voter (ab | bc | ca), so an upset in any one copy
// is outvoted. The three copies reload from d every cycle, which also
// flushes an upset at the next clock edge.
//
// upset[k] flips the chosen bits of copy k as they are captured; it is a
// test input that emulates a single event upset (this design's addition).
//
// Timing: q is the voted register content, one clock after d. Synchronous
// active-low reset clears all copies.
module tmr_reg #(
  parameter int unsigned W = 32
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic [W-1:0]        d,
  input  logic [2:0][W-1:0]   upset,
  output logic [W-1:0]        q
);

  logic [2:0][W-1:0] copy_q;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      copy_q <= '0;
    end else begin
      for (int k = 0; k < 3; k++) copy_q[k] <= d ^ upset[k];
    end
  end

  assign q = (copy_q[0] & copy_q[1]) | (copy_q[1] & copy_q[2]) | (copy_q[2] & copy_q[0]);

endmodule
