// tb_slr_bridge - random words through a 3-stage bridge; each must come out
// exactly STAGES cycles later, and reset must clear the chain.
module tb_slr_bridge;
  localparam int W = 12, ST = 3;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst;
  logic [W-1:0] d, q;
  logic [W-1:0] hist [$];
  int checks = 0, failures = 0;

  slr_bridge #(.W(W), .STAGES(ST)) u_dut (.clk(clk), .rst(rst), .d(d), .q(q));

  initial begin
    rst = 1; d = '1;
    repeat (2) @(negedge clk);
    checks++;
    if (q !== '0) begin failures++; $display("reset did not clear the bridge"); end
    rst = 0;
    for (int i = 0; i < 200; i++) begin
      d = W'($urandom);
      hist.push_back(d);
      @(negedge clk);
      if (hist.size() >= ST) begin
        automatic logic [W-1:0] e = hist.pop_front();
        checks++;
        if (q !== e) begin failures++; $display("q %h expected %h", q, e); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (2000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
