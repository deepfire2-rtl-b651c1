// tb_spike_packer - two packers: 4 spikes per round (4:8, two rounds per
// byte) and 16 spikes per round (two bytes per round). Random spike rounds
// arrive with random gaps; the bytes, their order within the byte and the
// wrapping byte index are compared with an independent model.
module tb_spike_packer;
  import df2_pkg::*;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst;
  int checks = 0, failures = 0;

  logic [3:0]  so4;  logic en4;  logic v4;  byte_t d4 [1];  logic [BA_W-1:0] i4;
  logic [15:0] so16; logic en16; logic v16; byte_t d16 [2]; logic [BA_W-1:0] i16;

  spike_packer #(.OMEGA(4),  .NBYTES(3)) u_4  (.clk(clk), .rst(rst), .so(so4),  .so_en(en4),
                                               .out_valid(v4),  .out_data(d4),  .out_idx(i4));
  spike_packer #(.OMEGA(16), .NBYTES(6)) u_16 (.clk(clk), .rst(rst), .so(so16), .so_en(en16),
                                               .out_valid(v16), .out_data(d16), .out_idx(i16));

  byte_t e4 [$];  int x4 [$];
  byte_t e16 [$]; int x16 [$];
  int n4 = 0, n16 = 0;
  logic [3:0] half;

  always @(negedge clk) begin
    if (!rst && v4) begin
      checks++;
      if (e4.size() == 0 || d4[0] !== e4[0] || int'(i4) != x4[0]) begin
        failures++;
        $display("4:8 got %h idx %0d", d4[0], i4);
      end
      void'(e4.pop_front()); void'(x4.pop_front());
    end
    if (!rst && v16) begin
      checks++;
      if (e16.size() < 2 || d16[0] !== e16[0] || d16[1] !== e16[1] || int'(i16) != x16[0]) begin
        failures++;
        $display("16 got %h %h idx %0d", d16[0], d16[1], i16);
      end
      void'(e16.pop_front()); void'(e16.pop_front()); void'(x16.pop_front());
    end
  end

  initial begin
    rst = 1; en4 = 0; en16 = 0; so4 = 0; so16 = 0;
    repeat (2) @(negedge clk);
    rst = 0;
    for (int r = 0; r < 200; r++) begin
      en4 = 1; en16 = 1;
      so4 = 4'($urandom); so16 = 16'($urandom);
      if (r % 2 == 0) half = so4;
      else begin
        e4.push_back({so4, half});
        x4.push_back(n4 % 3); n4++;
      end
      e16.push_back(so16[7:0]); e16.push_back(so16[15:8]);
      x16.push_back((2 * n16) % 6); n16++;
      @(negedge clk);
      en4 = 0; en16 = 0; so4 = 4'($urandom); so16 = 16'($urandom);
      repeat ($urandom_range(2)) @(negedge clk);
    end
    repeat (4) @(negedge clk);
    checks++;
    if (e4.size() != 0 || e16.size() != 0) begin failures++; $display("bytes missing"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (3000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
