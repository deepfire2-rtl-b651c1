// slr_bridge - one direction (Tx or Rx side) of an inter-SLR crossing.
//
// Signals leaving the primary SLR for a secondary one (input beats and their
// control) and the packed spike bytes coming back are carried over the die
// boundary through a chain of STAGES registers, which on the target device
// map onto the dedicated interposer flip-flops. Only spikes and control
// cross; weights and thresholds stay in the SLR that uses them.
//
// Timing: q = d delayed by STAGES cycles, one word per cycle, no stalls.
// Synchronous reset clears the chain (so no stale valid bits cross).
// The paper builds its bridges with several clock roots for high-speed
// crossing; that clocking is a placement/constraint matter and is not
// modelled here: both sides share clk.
module slr_bridge #(
  parameter int W      = 8,
  parameter int STAGES = 2
) (
  input  logic         clk,
  input  logic         rst,
  input  logic [W-1:0] d,
  output logic [W-1:0] q
);
  logic [W-1:0] r [STAGES];
  always_ff @(posedge clk) begin
    if (rst) begin
      for (int i = 0; i < STAGES; i++) r[i] <= '0;
    end else begin
      r[0] <= d;
      for (int i = 1; i < STAGES; i++) r[i] <= r[i-1];
    end
  end
  assign q = r[STAGES-1];
endmodule
