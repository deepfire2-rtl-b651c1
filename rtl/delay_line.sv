// delay_line - a chain of D flip-flops, used for re-timing and for lining up
// control with data inside pipelines. D = 0 is a plain wire.
// Synchronous active-high reset clears every stage.
module delay_line #(
  parameter int W = 1,
  parameter int D = 1
) (
  input  logic         clk,
  input  logic         rst,
  input  logic [W-1:0] d,
  output logic [W-1:0] q
);
  if (D == 0) begin : g_wire
    assign q = d;
  end else begin : g_regs
    logic [W-1:0] r [D];
    always_ff @(posedge clk) begin
      if (rst) begin
        for (int i = 0; i < D; i++) r[i] <= '0;
      end else begin
        r[0] <= d;
        for (int i = 1; i < D; i++) r[i] <= r[i-1];
      end
    end
    assign q = r[D-1];
  end
endmodule
